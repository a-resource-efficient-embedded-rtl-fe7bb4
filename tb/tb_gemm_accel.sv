// tb_gemm_accel -- end-to-end test of the DFP GEMM accelerator at its
// default size (8x9 / 9x224 / 8x224 tiles, 64-bit AXI).
//
// A host model programs the AXI-Lite registers, starts a job and polls
// STATUS; the matrices live in a behavioural AXI memory with random
// back-pressure. Each result C is compared element by element with a
// reference computed here: per k tile of nine the dot product is added to
// the running 16-bit sum (clipped to 16 bits), then the sum is shifted by
// the layer shift (floor for right shifts) and clipped to 8 bits.
// The jobs are chosen so that every mechanism happens at least once, and
// each is counted: several row / column / k tiles, edge tiles, partial-sum
// accumulation across k tiles, 16-bit clipping, 8-bit saturation, right and
// left shifts, AXI stalls, bursts split at a 4 KB boundary and a bus error
// reported in STATUS. The engine's issue count is checked against
// M * N * ceil(K / 9), i.e. nine multiply-accumulates per issue.
module tb_gemm_accel;
  import gemm_pkg::*;
  localparam int MEM = 1 << 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // AXI-Lite
  logic [5:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  // AXI4
  logic [31:0] m_araddr, m_awaddr;
  logic [7:0]  m_arlen, m_awlen;
  logic [2:0]  m_arsize, m_awsize;
  logic        m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic        m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [63:0] m_rdata, m_wdata;
  logic [7:0]  m_wstrb;
  logic [1:0]  m_rresp, m_bresp;
  logic        pe_fire, sat_event, acc_clip;

  gemm_accel dut (.clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .m_axi_araddr(m_araddr), .m_axi_arlen(m_arlen), .m_axi_arsize(m_arsize), .m_axi_arburst(),
    .m_axi_arcache(), .m_axi_arprot(), .m_axi_arvalid(m_arvalid), .m_axi_arready(m_arready),
    .m_axi_rdata(m_rdata), .m_axi_rresp(m_rresp), .m_axi_rlast(m_rlast), .m_axi_rvalid(m_rvalid),
    .m_axi_rready(m_rready),
    .m_axi_awaddr(m_awaddr), .m_axi_awlen(m_awlen), .m_axi_awsize(m_awsize), .m_axi_awburst(),
    .m_axi_awcache(), .m_axi_awprot(), .m_axi_awvalid(m_awvalid), .m_axi_awready(m_awready),
    .m_axi_wdata(m_wdata), .m_axi_wstrb(m_wstrb), .m_axi_wlast(m_wlast), .m_axi_wvalid(m_wvalid),
    .m_axi_wready(m_wready), .m_axi_bresp(m_bresp), .m_axi_bvalid(m_bvalid), .m_axi_bready(m_bready),
    .pe_fire, .sat_event, .acc_clip);

  axi_mem_model #(.MEM_BYTES(MEM), .STALL_PCT(25)) mem (.clk, .rst_n,
    .araddr(m_araddr), .arlen(m_arlen), .arsize(m_arsize), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize), .awvalid(m_awvalid), .awready(m_awready),
    .wdata(m_wdata), .wstrb(m_wstrb), .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready),
    .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready));

  // ---- event counters ----
  longint n_fire = 0, n_sat = 0, n_clip = 0, n_rd_cmd = 0;
  always @(posedge clk) if (rst_n) begin
    if (pe_fire)   n_fire++;
    if (sat_event) n_sat++;
    if (acc_clip)  n_clip++;
    if (dut.rd_start) n_rd_cmd++;
  end
  int n_multi_tile = 0, n_edge = 0, n_kacc = 0, n_left = 0, n_right = 0, n_err = 0;

  // ---- host: AXI-Lite ----
  task automatic axil_write(logic [5:0] a, logic [31:0] d);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wstrb = 4'hF; wvalid = 1;
    #1;
    while (!(awready && wready)) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    awvalid = 0; wvalid = 0; bready = 1;
    while (!bvalid) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    bready = 0;
  endtask

  task automatic axil_read(logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    arvalid = 0; rready = 1;
    while (!rvalid) begin @(negedge clk); #1; end
    d = rdata;
    @(posedge clk); #1;
    rready = 0;
  endtask

  // ---- reference ----
  function automatic int ref_elem(int A, int B, int K, int N, int i, int j, int sh);
    longint acc = 0, v;
    for (int k0 = 0; k0 < K || (K == 0 && k0 == 0); k0 += 9) begin
      longint t = 0;
      for (int k = k0; k < k0 + 9 && k < K; k++)
        t += longint'($signed(mem.mem[A + i * K + k])) * longint'($signed(mem.mem[B + k * N + j]));
      v = (k0 == 0) ? t : acc + t;
      acc = (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
    end
    if (sh >= 0) v = acc >>> sh;                 // floor
    else         v = acc * (longint'(1) << (-sh));
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction

  // fill: mode 0 random, 1 small random, 2 extreme (-128)
  task automatic fill(int base, int n, int mode);
    for (int x = 0; x < n; x++)
      mem.mem[base + x] = (mode == 2) ? 8'h80 : (mode == 1) ? 8'($urandom_range(0, 15) - 8) : 8'($urandom);
  endtask

  task automatic job(int M, int K, int N, int sh, int A, int B, int C, int mode, bit expect_err = 0);
    logic [31:0] st;
    longint fire0 = n_fire;
    int bad = 0, t0;
    fill(A, M * K, mode);
    fill(B, K * N, mode);
    fill(C, M * N, 0);       // old contents must be overwritten
    axil_write(REG_A_ADDR, 32'(A));
    axil_write(REG_B_ADDR, 32'(B));
    axil_write(REG_C_ADDR, 32'(C));
    axil_write(REG_M, 32'(M));
    axil_write(REG_K, 32'(K));
    axil_write(REG_N, 32'(N));
    axil_write(REG_SHIFT, 32'(sh));
    axil_write(REG_CTRL, 32'h1);
    t0 = 0;
    do begin
      repeat (50) @(posedge clk);
      axil_read(REG_STATUS, st);
      t0++;
    end while (st[0] && t0 < 200000);
    checks++;
    if (st[1] != 1'b1 || st[2] != expect_err) begin
      failures++; $display("FAIL job %0dx%0dx%0d status %h", M, K, N, st);
    end
    if (st[2]) n_err++;
    if (!expect_err) begin
      for (int i = 0; i < M; i++) for (int j = 0; j < N; j++) begin
        int e = ref_elem(A, B, K, N, i, j, sh);
        checks++;
        if (int'($signed(mem.mem[C + i * N + j])) != e) begin
          failures++; bad++;
          if (bad < 6) $display("FAIL job %0dx%0dx%0d C[%0d][%0d]=%0d exp %0d", M, K, N, i, j,
                                $signed(mem.mem[C + i * N + j]), e);
        end
      end
      // throughput: one issue of nine MACs per output element and k tile
      checks++;
      if (n_fire - fire0 != longint'(M) * N * ((K + 8) / 9 > 0 ? (K + 8) / 9 : 1)) begin
        failures++; $display("FAIL engine issues %0d", n_fire - fire0);
      end
    end
    if (M > 8 || N > 224 || K > 9) n_multi_tile++;
    if (M % 8 != 0 || N % 224 != 0 || K % 9 != 0) n_edge++;
    if (K > 9) n_kacc++;
    if (sh < 0) n_left++; else if (sh > 0) n_right++;
    $display("job %0dx%0dx%0d shift %0d done", M, K, N, sh);
  endtask

  task automatic count(string what, longint n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
  endtask

  initial begin
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    wdata = 0; wstrb = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    job(1, 1, 1, 0, 'h100, 'h200, 'h300, 0);
    job(8, 9, 224, 7, 'h1000, 'h2000, 'h8000, 0);               // exactly one tile
    job(19, 20, 500, 8, 'h10000, 'h20FF0, 'h40000, 0);          // B rows straddle 4 KB
    job(5, 27, 230, -2, 'h50003, 'h51001, 'h60005, 1);          // left shift, odd alignment
    job(4, 18, 12, 0, 'h70000, 'h70100, 'h70400, 2);            // 16-bit clip + 8-bit saturation
    job(3, 0, 5, 0, 'h71000, 'h71100, 'h71200, 0);              // K = 0 gives zeros
    mem.err_lo = 32'h72010; mem.err_hi = 32'h72020;
    job(2, 9, 40, 4, 'h72000, 'h73000, 'h74000, 0, 1);          // bus error
    mem.err_lo = 32'hFFFF_FFFF; mem.err_hi = 32'hFFFF_FFFF;
    job(9, 10, 225, 5, 'h75000, 'h76000, 'h78000, 0);           // error flag cleared again
    $display("mechanisms:");
    count("multi-tile jobs", n_multi_tile);
    count("edge tiles", n_edge);
    count("k-tile accumulation", n_kacc);
    count("16-bit partial-sum clips", n_clip);
    count("8-bit output saturations", n_sat);
    count("right shifts", n_right);
    count("left shifts", n_left);
    count("AXI stall cycles", mem.stall_cycles);
    count("4 KB burst splits", longint'(mem.rd_bursts) - n_rd_cmd);
    count("bus errors reported", n_err);
    checks++;
    if (mem.cross_errors != 0) begin failures++; $display("FAIL AXI burst shape errors %0d", mem.cross_errors); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
