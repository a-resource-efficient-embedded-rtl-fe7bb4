// axi_mem_model -- behavioural AXI4 slave standing in for system memory
// reached through the coherency port. Not synthesizable design content.
//
// Byte array of MEM_BYTES (addresses wrap). Serves one read burst and one
// write burst at a time, INCR bursts of any size; read beats return the whole
// aligned bus word, writes honour the strobes. Ready/valid signals are
// throttled at random (STALL_PCT percent of cycles) to exercise back-pressure.
// Accesses inside [err_lo, err_hi) answer SLVERR. Counters report how many
// bursts, beats and stall cycles were seen.
module axi_mem_model #(
  parameter int unsigned MEM_BYTES = 65536,
  parameter int unsigned DW        = 64,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [31:0]     araddr,
  input  logic [7:0]      arlen,
  input  logic [2:0]      arsize,
  input  logic            arvalid,
  output logic            arready,
  output logic [DW-1:0]   rdata,
  output logic [1:0]      rresp,
  output logic            rlast,
  output logic            rvalid,
  input  logic            rready,
  input  logic [31:0]     awaddr,
  input  logic [7:0]      awlen,
  input  logic [2:0]      awsize,
  input  logic            awvalid,
  output logic            awready,
  input  logic [DW-1:0]   wdata,
  input  logic [DW/8-1:0] wstrb,
  input  logic            wlast,
  input  logic            wvalid,
  output logic            wready,
  output logic [1:0]      bresp,
  output logic            bvalid,
  input  logic            bready
);

  localparam int unsigned NB = DW / 8;

  logic [7:0] mem [MEM_BYTES];
  logic [31:0] err_lo = 32'hFFFF_FFFF, err_hi = 32'hFFFF_FFFF;

  int unsigned rd_bursts = 0, wr_bursts = 0, rd_beats = 0, wr_beats = 0;
  int unsigned stall_cycles = 0, max_rd_len = 0, cross_errors = 0;

  function automatic bit stall();
    return ($urandom_range(99) < STALL_PCT);
  endfunction

  function automatic bit in_err(logic [31:0] a);
    return (a >= err_lo) && (a < err_hi);
  endfunction

  // ---------------- read side ----------------
  logic        r_act;
  logic [31:0] r_addr;
  logic [8:0]  r_left;
  logic [2:0]  r_size;
  logic        r_err;

  task automatic load_rbeat();
    logic [31:0] base;
    base = r_addr & ~32'(NB - 1);
    for (int i = 0; i < NB; i++) rdata[8*i +: 8] <= mem[(base + i) % MEM_BYTES];
    rlast <= (r_left == 9'd1);
    rresp <= (r_err || in_err(r_addr)) ? 2'b10 : 2'b00;
  endtask

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arready <= 1'b0; rvalid <= 1'b0; rlast <= 1'b0; rresp <= 2'b00; rdata <= '0;
      r_act <= 1'b0; r_addr <= '0; r_left <= '0; r_size <= '0; r_err <= 1'b0;
    end else begin
      arready <= 1'b0;
      if (!r_act) begin
        if (arvalid && arready) begin
          r_act  <= 1'b1;
          r_addr <= araddr;
          r_left <= 9'(arlen) + 9'd1;
          r_size <= arsize;
          r_err  <= 1'b0;
          rd_bursts++;
          if (int'(arlen) + 1 > max_rd_len) max_rd_len = int'(arlen) + 1;
          if ((araddr & 32'hFFF) + ((32'(arlen) + 1) << arsize) > 32'h1000) cross_errors++;
        end else if (arvalid) begin
          if (!stall()) arready <= 1'b1; else stall_cycles++;
        end
      end else begin
        if (rvalid && rready) begin
          rd_beats++;
          rvalid <= 1'b0;
          r_addr <= r_addr + (32'd1 << r_size);
          r_left <= r_left - 1'b1;
          if (r_left == 9'd1) r_act <= 1'b0;
        end else if (!rvalid) begin
          if (!stall()) begin
            load_rbeat();
            rvalid <= 1'b1;
          end else stall_cycles++;
        end
      end
    end
  end

  // ---------------- write side ----------------
  logic        w_act, b_pend;
  logic [31:0] w_addr;
  logic [2:0]  w_size;
  logic [8:0]  w_left;
  logic        w_err;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      awready <= 1'b0; wready <= 1'b0; bvalid <= 1'b0; bresp <= 2'b00;
      w_act <= 1'b0; b_pend <= 1'b0; w_addr <= '0; w_size <= '0; w_left <= '0; w_err <= 1'b0;
    end else begin
      awready <= 1'b0;
      wready  <= 1'b0;
      if (bvalid && bready) bvalid <= 1'b0;
      if (!w_act && !b_pend) begin
        if (awvalid && awready) begin
          w_act  <= 1'b1;
          w_addr <= awaddr;
          w_size <= awsize;
          w_left <= 9'(awlen) + 9'd1;
          w_err  <= 1'b0;
          wr_bursts++;
          if ((awaddr & 32'hFFF) + ((32'(awlen) + 1) << awsize) > 32'h1000) cross_errors++;
        end else if (awvalid) begin
          if (!stall()) awready <= 1'b1; else stall_cycles++;
        end
      end else if (w_act) begin
        if (wvalid && wready) begin
          logic [31:0] base;
          base = w_addr & ~32'(NB - 1);
          wr_beats++;
          for (int i = 0; i < NB; i++)
            if (wstrb[i]) mem[(base + i) % MEM_BYTES] = wdata[8*i +: 8];
          if (in_err(w_addr)) w_err <= 1'b1;
          w_addr <= w_addr + (32'd1 << w_size);
          w_left <= w_left - 1'b1;
          if (wlast != (w_left == 9'd1)) cross_errors++;
          if (w_left == 9'd1) begin
            w_act  <= 1'b0;
            b_pend <= 1'b1;
          end
        end else if (wvalid) begin
          if (!stall()) wready <= 1'b1; else stall_cycles++;
        end
      end else if (b_pend && !bvalid) begin
        if (!stall()) begin
          bvalid <= 1'b1;
          bresp  <= w_err ? 2'b10 : 2'b00;
          b_pend <= 1'b0;
        end
      end
    end
  end

endmodule
