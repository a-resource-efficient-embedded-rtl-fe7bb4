// tb_axil_ctrl_regs -- AXI4-Lite accesses to the control slave: write and
// read back every configuration register (with byte strobes), check the
// sign extension of SHIFT, the start pulse (and that it is refused while
// busy), done/err capture from the job, and that a write with AW and W
// arriving on different cycles is still accepted exactly once.
module tb_axil_ctrl_regs;
  import gemm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, starts = 0;

  logic [5:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  gemm_cfg_t   cfg;
  logic        start, busy, job_done, job_err;

  axil_ctrl_regs dut (.clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .cfg, .start, .busy, .job_done, .job_err);

  always @(posedge clk) if (rst_n && start) starts++;

  // Drive at the falling edge, look at ready a little later (after the
  // combinational response), hand over at the next rising edge.
  task automatic axil_write(logic [5:0] a, logic [31:0] d, logic [3:0] s = 4'hF, int w_delay = 0);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wstrb = s; wvalid = (w_delay == 0);
    for (int i = 0; i < w_delay; i++) @(negedge clk);
    wvalid = 1;
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

  task automatic expect32(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    wdata = 0; wstrb = 0; busy = 0; job_done = 0; job_err = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    axil_write(REG_A_ADDR, 32'h1000_0000);
    axil_write(REG_B_ADDR, 32'h2000_0004);
    axil_write(REG_C_ADDR, 32'h3000_0008, 4'hF, 3);   // W three cycles after AW
    axil_write(REG_M, 32'd16);
    axil_write(REG_K, 32'd9);
    axil_write(REG_N, 32'd76800);
    axil_write(REG_SHIFT, 32'h0000_003D);              // -3
    axil_write(REG_N, 32'hAB00_0000, 4'b1000);          // byte-strobed update
    expect32("cfg.a", cfg.a_addr, 32'h1000_0000);
    expect32("cfg.c", cfg.c_addr, 32'h3000_0008);
    expect32("cfg.n", cfg.n, 32'hAB01_2C00);
    axil_read(REG_A_ADDR, d); expect32("A_ADDR", d, 32'h1000_0000);
    axil_read(REG_B_ADDR, d); expect32("B_ADDR", d, 32'h2000_0004);
    axil_read(REG_C_ADDR, d); expect32("C_ADDR", d, 32'h3000_0008);
    axil_read(REG_M, d);      expect32("M", d, 32'd16);
    axil_read(REG_K, d);      expect32("K", d, 32'd9);
    axil_read(REG_N, d);      expect32("N", d, 32'hAB01_2C00);
    axil_read(REG_SHIFT, d);  expect32("SHIFT", d, 32'hFFFF_FFFD);
    axil_read(6'h3C, d);      expect32("unmapped", d, 32'h0);
    axil_read(REG_STATUS, d); expect32("STATUS idle", d, 32'h0);
    // start a job
    axil_write(REG_CTRL, 32'h1);
    expect32("one start pulse", 32'(starts), 32'd1);
    @(negedge clk) busy = 1;
    axil_read(REG_STATUS, d); expect32("STATUS busy", d, 32'h1);
    axil_write(REG_CTRL, 32'h1);                        // refused while busy
    expect32("start refused while busy", 32'(starts), 32'd1);
    @(negedge clk) begin busy = 0; job_done = 1; job_err = 1; end
    @(negedge clk) job_done = 0;
    axil_read(REG_STATUS, d); expect32("STATUS done+err", d, 32'h6);
    axil_write(REG_CTRL, 32'h1);
    expect32("second start", 32'(starts), 32'd2);
    axil_read(REG_STATUS, d); expect32("STATUS cleared by start", d, 32'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
