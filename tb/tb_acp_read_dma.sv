// tb_acp_read_dma -- runs the read DMA against the behavioural AXI memory
// with random stalls. Random runs (1..700 bytes, any alignment, some placed
// to straddle a 4 KB boundary) are checked byte for byte against memory and
// for index order; the memory model flags any burst that crosses 4 KB.
// A last run reads from an address range answering SLVERR and expects err.
module tb_acp_read_dma;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, busy, done, err, out_valid;
  logic [31:0] addr;
  logic [15:0] len, out_idx;
  logic [7:0]  out_data;
  logic [31:0] araddr; logic [7:0] arlen; logic [2:0] arsize; logic arvalid, arready;
  logic [63:0] rdata;  logic [1:0] rresp; logic rlast, rvalid, rready;

  acp_read_dma dut (.clk, .rst_n, .start, .addr, .len, .busy, .done, .err,
    .out_valid, .out_data, .out_idx,
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(),
    .m_axi_arcache(), .m_axi_arprot(), .m_axi_arvalid(arvalid), .m_axi_arready(arready),
    .m_axi_rdata(rdata), .m_axi_rresp(rresp), .m_axi_rlast(rlast), .m_axi_rvalid(rvalid),
    .m_axi_rready(rready));

  axi_mem_model #(.MEM_BYTES(16384)) mem (.clk, .rst_n,
    .araddr, .arlen, .arsize, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr('0), .awlen('0), .awsize('0), .awvalid(1'b0), .awready(), .wdata('0), .wstrb('0),
    .wlast(1'b0), .wvalid(1'b0), .wready(), .bresp(), .bvalid(), .bready(1'b0));

  int got;
  logic [31:0] cur_base;
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (int'(out_idx) != got || out_data != mem.mem[(cur_base + out_idx) % 16384]) begin
      failures++;
      if (failures < 10) $display("FAIL idx=%0d (exp %0d) data=%h exp %h", out_idx, got, out_data,
                                  mem.mem[(cur_base + out_idx) % 16384]);
    end
    got++;
  end

  task automatic run(logic [31:0] a, int n, bit expect_err);
    cur_base = a; got = 0;
    @(negedge clk); start = 1; addr = a; len = 16'(n);
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);                   // the last byte comes with done
    checks++;
    if (got != n || err != expect_err) begin
      failures++; $display("FAIL run addr=%h len=%0d got %0d bytes err=%0b", a, n, got, err);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; addr = 0; len = 0;
    for (int i = 0; i < 16384; i++) mem.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk); rst_n = 1;
    run(32'd0, 1, 0);
    run(32'd3, 9, 0);
    run(32'd4090, 20, 0);             // straddles 4 KB
    run(32'd100, 600, 0);             // more than 256 beats
    for (int t = 0; t < 40; t++) begin
      int n = $urandom_range(1, 700);
      logic [31:0] a = (t % 4 == 0) ? 32'(4096 * $urandom_range(1, 2) - $urandom_range(1, 200))
                                    : 32'($urandom_range(0, 15000));
      run(a, n, 0);
    end
    run(32'd50, 0, 0);                // empty run: done, nothing moved
    mem.err_lo = 32'd8000; mem.err_hi = 32'd8010;
    run(32'd7990, 30, 1);
    run(32'd9000, 30, 0);             // err cleared by the next start
    checks++;
    if (mem.cross_errors != 0 || mem.max_rd_len > 256 || mem.stall_cycles == 0) begin
      failures++; $display("FAIL cross=%0d maxlen=%0d stalls=%0d", mem.cross_errors, mem.max_rd_len, mem.stall_cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
