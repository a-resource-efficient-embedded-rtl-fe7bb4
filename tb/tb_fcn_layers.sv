// tb_fcn_layers -- runs the GEMM shapes of two FCN layers on the accelerator
// at its default size: layer 1, (M, K, N) = (16, 9, 76800), a 3x3 convolution
// from one input channel to 16 output maps over a 320 x 240 image, and
// layer 2, (32, 144, 19200), a strided 3x3 convolution from 16 to 32 maps.
// Both shapes are quoted for the CASIA Interval V4 model. Weights and features
// are random 8-bit values; a per-layer shift keeps outputs mostly in range.
// Every output is compared with a reference and the clock cycles per layer
// are reported next to the ideal compute time M * N * ceil(K/9) cycles.
//
// Below: the header of the end-to-end testbench, which this one follows:
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
module tb_fcn_layers;
  import gemm_pkg::*;
  localparam int MEM = 8 << 20;

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
  longint      n_fire = 0;
  always @(posedge clk) if (rst_n && pe_fire) n_fire++;

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

  axi_mem_model #(.MEM_BYTES(MEM), .STALL_PCT(0)) mem (.clk, .rst_n,
    .araddr(m_araddr), .arlen(m_arlen), .arsize(m_arsize), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize), .awvalid(m_awvalid), .awready(m_awready),
    .wdata(m_wdata), .wstrb(m_wstrb), .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready),
    .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready));

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

  task automatic layer(string name, int M, int K, int N, int sh);
    logic [31:0] st;
    longint fire0 = n_fire, ideal;
    int A = 'h1000, B = 'h10000, C = 'h300000, bad = 0;
    time t0;
    for (int x = 0; x < M * K; x++) mem.mem[A + x] = 8'($urandom);
    for (int x = 0; x < K * N; x++) mem.mem[B + x] = 8'($urandom);
    axil_write(REG_A_ADDR, 32'(A));
    axil_write(REG_B_ADDR, 32'(B));
    axil_write(REG_C_ADDR, 32'(C));
    axil_write(REG_M, 32'(M));
    axil_write(REG_K, 32'(K));
    axil_write(REG_N, 32'(N));
    axil_write(REG_SHIFT, 32'(sh));
    t0 = $time;
    axil_write(REG_CTRL, 32'h1);
    do begin
      repeat (1000) @(posedge clk);
      axil_read(REG_STATUS, st);
    end while (st[0]);
    checks++;
    if (st[2:1] != 2'b01) begin failures++; $display("FAIL %s status %h", name, st); end
    for (int i = 0; i < M; i++) for (int j = 0; j < N; j++) begin
      int e = ref_elem(A, B, K, N, i, j, sh);
      checks++;
      if (int'($signed(mem.mem[C + i * N + j])) != e) begin
        failures++; bad++;
        if (bad < 6) $display("FAIL %s C[%0d][%0d]=%0d exp %0d", name, i, j, $signed(mem.mem[C + i * N + j]), e);
      end
    end
    ideal = longint'(M) * N * ((K + 8) / 9);
    checks++;
    if (n_fire - fire0 != ideal) begin failures++; $display("FAIL %s engine issues %0d exp %0d", name, n_fire - fire0, ideal); end
    $display("%s (M,K,N)=(%0d,%0d,%0d): %0d cycles, compute-only bound %0d cycles (%0d MACs)",
             name, M, K, N, ($time - t0) / 10, ideal, longint'(M) * K * N);
  endtask

  initial begin
    #2s;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    wdata = 0; wstrb = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    layer("layer 1", 16, 9, 76800, 9);
    layer("layer 2", 32, 144, 19200, 11);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
