// tb_acp_write_dma -- runs the write DMA against the behavioural AXI memory
// with random stalls on both sides: the byte source withholds valid at random.
// Each run writes a random run of bytes at any alignment (some across a 4 KB
// boundary) and the memory is then compared with the expected image, so
// wrong lanes, strobes, lengths or stray writes show up. A run into an
// SLVERR range must raise err.
module tb_acp_write_dma;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, busy, done, err, in_valid, in_ready;
  logic [31:0] addr;
  logic [15:0] len;
  logic [7:0]  in_data;
  logic [31:0] awaddr; logic [7:0] awlen; logic [2:0] awsize; logic awvalid, awready;
  logic [63:0] wdata;  logic [7:0] wstrb; logic wlast, wvalid, wready;
  logic [1:0]  bresp;  logic bvalid, bready;

  acp_write_dma dut (.clk, .rst_n, .start, .addr, .len, .busy, .done, .err,
    .in_valid, .in_data, .in_ready,
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(),
    .m_axi_awcache(), .m_axi_awprot(), .m_axi_awvalid(awvalid), .m_axi_awready(awready),
    .m_axi_wdata(wdata), .m_axi_wstrb(wstrb), .m_axi_wlast(wlast), .m_axi_wvalid(wvalid),
    .m_axi_wready(wready), .m_axi_bresp(bresp), .m_axi_bvalid(bvalid), .m_axi_bready(bready));

  axi_mem_model #(.MEM_BYTES(16384)) mem (.clk, .rst_n,
    .araddr('0), .arlen('0), .arsize('0), .arvalid(1'b0), .arready(), .rdata(), .rresp(),
    .rlast(), .rvalid(), .rready(1'b0),
    .awaddr, .awlen, .awsize, .awvalid, .awready, .wdata, .wstrb, .wlast, .wvalid, .wready,
    .bresp, .bvalid, .bready);

  logic [7:0] image [16384];
  logic [7:0] src [$];

  // byte source: random gaps, holds each byte until it is accepted
  always @(posedge clk) begin
    if (in_valid && in_ready) void'(src.pop_front());
    if (!in_valid || in_ready) begin
      in_valid <= (src.size() > 0) && ($urandom_range(3) != 0);
      in_data  <= (src.size() > 0) ? src[0] : 8'h00;
    end
  end

  task automatic run(logic [31:0] a, int n, bit expect_err);
    for (int i = 0; i < n; i++) begin
      logic [7:0] v = 8'($urandom);
      src.push_back(v);
      image[(a + i) % 16384] = v;
    end
    @(negedge clk); start = 1; addr = a; len = 16'(n);
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (src.size() != 0 || err != expect_err) begin
      failures++; $display("FAIL run addr=%h len=%0d left=%0d err=%0b", a, n, src.size(), err);
      src.delete();
    end
  endtask

  task automatic compare();
    int bad = 0;
    for (int i = 0; i < 16384; i++) if (mem.mem[i] != image[i]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d bytes differ", bad); end
  endtask

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; addr = 0; len = 0; in_valid = 0; in_data = 0;
    for (int i = 0; i < 16384; i++) begin mem.mem[i] = 8'($urandom); image[i] = mem.mem[i]; end
    repeat (3) @(posedge clk); rst_n = 1;
    run(32'd5, 1, 0);
    run(32'd4093, 11, 0);
    run(32'd200, 560, 0);
    compare();
    for (int t = 0; t < 30; t++) begin
      int n = $urandom_range(1, 600);
      logic [31:0] a = (t % 3 == 0) ? 32'(4096 * $urandom_range(1, 2) - $urandom_range(1, 100))
                                    : 32'($urandom_range(0, 15000));
      run(a, n, 0);
      compare();
    end
    mem.err_lo = 32'd1000; mem.err_hi = 32'd1004;
    run(32'd990, 20, 1);
    run(32'd3000, 20, 0);
    compare();
    checks++;
    if (mem.cross_errors != 0) begin failures++; $display("FAIL burst shape errors=%0d", mem.cross_errors); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
