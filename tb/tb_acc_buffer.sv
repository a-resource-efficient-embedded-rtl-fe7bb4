// tb_acc_buffer -- Buffer C: random interleaved writes and reads over the
// 8 x 224 words, compared with a reference array; checks the one-cycle read
// latency, read-enable hold and read-old-data on a same-cycle collision.
module tb_acc_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re;
  logic [10:0] waddr, raddr;
  logic [15:0] wdata, rdata;
  acc_buffer dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  logic [15:0] ref_m [1792];

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] expd, held;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 1792; i++) begin
      @(negedge clk); we = 1; waddr = 11'(i); wdata = 16'($urandom); ref_m[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      re = 1; raddr = 11'($urandom_range(1791));
      we = $urandom_range(1);
      waddr = (n % 7 == 0) ? raddr : 11'($urandom_range(1791));
      wdata = 16'($urandom);
      expd = ref_m[raddr];            // old value even if written this cycle
      if (we) ref_m[waddr] = wdata;
      @(negedge clk);
      we = 0; re = 0;
      checks++;
      if (rdata != expd) begin failures++; if (failures < 10) $display("FAIL addr=%0d got %h exp %h", raddr, rdata, expd); end
      held = rdata;
      raddr = 11'($urandom_range(1791));
      @(negedge clk);
      checks++;
      if (rdata != held) begin failures++; $display("FAIL read data not held with re low"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
