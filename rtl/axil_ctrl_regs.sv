// axil_ctrl_regs -- AXI4-Lite control slave of the accelerator.
//
// The host CPU acts as the control unit: over a separate AXI-Lite port it
// writes the memory addresses of A, B and C, the GEMM dimensions (M, K, N)
// and the radix-point shift of the layer, then sets start. It learns that
// the job has finished by polling the status register. That the host
// programs addresses and start over AXI-Lite is the published design; the
// register map below is this design's own:
//
//   0x00 CTRL    W: bit0 = 1 starts a job (ignored while busy)
//   0x04 STATUS  R: bit0 busy, bit1 done (set at the end of a job, cleared
//                   by the next start), bit2 bus error of the last job
//   0x08 A_ADDR  0x0C B_ADDR  0x10 C_ADDR   byte addresses, row-major
//   0x14 M       0x18 K       0x1C N        matrix dimensions
//   0x20 SHIFT   bits 5:0, signed; >0 shifts right, <0 shifts left
//
// Timing: a write is accepted when both AW and W are valid and answered
// with OKAY on B the next cycle; a read is answered on R the cycle after AR.
// Unmapped addresses read as zero and ignore writes. A STATUS read in the
// cycle the job ends already reports done (never neither busy nor done).
module axil_ctrl_regs
  import gemm_pkg::*;
#(
  parameter int unsigned AW = AXIL_ADDR_W
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite slave
  input  logic [AW-1:0] s_axil_awaddr,
  input  logic          s_axil_awvalid,
  output logic          s_axil_awready,
  input  logic [31:0]   s_axil_wdata,
  input  logic [3:0]    s_axil_wstrb,
  input  logic          s_axil_wvalid,
  output logic          s_axil_wready,
  output logic [1:0]    s_axil_bresp,
  output logic          s_axil_bvalid,
  input  logic          s_axil_bready,
  input  logic [AW-1:0] s_axil_araddr,
  input  logic          s_axil_arvalid,
  output logic          s_axil_arready,
  output logic [31:0]   s_axil_rdata,
  output logic [1:0]    s_axil_rresp,
  output logic          s_axil_rvalid,
  input  logic          s_axil_rready,
  // to / from the accelerator core
  output gemm_cfg_t     cfg,
  output logic          start,
  input  logic          busy,
  input  logic          job_done,   // one-cycle pulse at the end of a job
  input  logic          job_err
);

  logic done_flag, err_flag;
  logic wr_fire, rd_fire;

  // Accept a write only when address and data are both present and the
  // previous response has been taken.
  assign wr_fire        = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_fire;
  assign s_axil_wready  = wr_fire;
  assign s_axil_bresp   = AXI_RESP_OKAY;
  assign rd_fire        = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_fire;
  assign s_axil_rresp   = AXI_RESP_OKAY;

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [3:0] strb);
    for (int i = 0; i < 4; i++) if (strb[i]) old[8*i +: 8] = nw[8*i +: 8];
    return old;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg           <= '0;
      start         <= 1'b0;
      done_flag     <= 1'b0;
      err_flag      <= 1'b0;
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      start <= 1'b0;
      if (job_done) begin
        done_flag <= 1'b1;
        err_flag  <= job_err;
      end
      // write channel
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr_fire) begin
        s_axil_bvalid <= 1'b1;
        unique case ({s_axil_awaddr[AW-1:2], 2'b00})
          REG_CTRL:   if (s_axil_wstrb[0] && s_axil_wdata[0] && !busy) begin
                        start     <= 1'b1;
                        done_flag <= 1'b0;
                        err_flag  <= 1'b0;
                      end
          REG_A_ADDR: cfg.a_addr <= merge(cfg.a_addr, s_axil_wdata, s_axil_wstrb);
          REG_B_ADDR: cfg.b_addr <= merge(cfg.b_addr, s_axil_wdata, s_axil_wstrb);
          REG_C_ADDR: cfg.c_addr <= merge(cfg.c_addr, s_axil_wdata, s_axil_wstrb);
          REG_M:      cfg.m      <= merge(cfg.m, s_axil_wdata, s_axil_wstrb);
          REG_K:      cfg.k      <= merge(cfg.k, s_axil_wdata, s_axil_wstrb);
          REG_N:      cfg.n      <= merge(cfg.n, s_axil_wdata, s_axil_wstrb);
          REG_SHIFT:  if (s_axil_wstrb[0]) cfg.shift <= s_axil_wdata[SHIFT_W-1:0];
          default: ;
        endcase
      end
      // read channel
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (rd_fire) begin
        s_axil_rvalid <= 1'b1;
        unique case ({s_axil_araddr[AW-1:2], 2'b00})
          REG_STATUS: s_axil_rdata <= {29'd0, job_done ? job_err : err_flag,
                                        done_flag | job_done, busy & ~job_done};
          REG_A_ADDR: s_axil_rdata <= cfg.a_addr;
          REG_B_ADDR: s_axil_rdata <= cfg.b_addr;
          REG_C_ADDR: s_axil_rdata <= cfg.c_addr;
          REG_M:      s_axil_rdata <= cfg.m;
          REG_K:      s_axil_rdata <= cfg.k;
          REG_N:      s_axil_rdata <= cfg.n;
          REG_SHIFT:  s_axil_rdata <= 32'(signed'(cfg.shift));
          default:    s_axil_rdata <= '0;
        endcase
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));

endmodule
