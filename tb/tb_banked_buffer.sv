// tb_banked_buffer -- fills a Buffer-A-shaped (9 banks x 8) and a
// Buffer-B-shaped (9 banks x 224) instance element by element, then reads
// every address and checks all nine banks against a reference array,
// including the one-cycle read latency and a write followed by a read of the
// same word in the next cycle.
module tb_banked_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // Buffer A shape
  logic       a_we;  logic [3:0] a_wbank; logic [2:0] a_waddr; logic [7:0] a_wdata;
  logic [2:0] a_raddr; logic [7:0] a_rdata [9];
  banked_buffer #(.BANKS(9), .DEPTH(8)) u_a (.clk, .we(a_we), .wbank(a_wbank), .waddr(a_waddr),
    .wdata(a_wdata), .raddr(a_raddr), .rdata(a_rdata));
  // Buffer B shape (defaults)
  logic       b_we;  logic [3:0] b_wbank; logic [7:0] b_waddr; logic [7:0] b_wdata;
  logic [7:0] b_raddr; logic [7:0] b_rdata [9];
  banked_buffer u_b (.clk, .we(b_we), .wbank(b_wbank), .waddr(b_waddr),
    .wdata(b_wdata), .raddr(b_raddr), .rdata(b_rdata));

  logic [7:0] ref_a [9][8];
  logic [7:0] ref_b [9][224];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_we = 0; b_we = 0; a_raddr = 0; b_raddr = 0;
    a_wbank = 0; a_waddr = 0; a_wdata = 0; b_wbank = 0; b_waddr = 0; b_wdata = 0;
    for (int k = 0; k < 9; k++) for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      a_we = 1; a_wbank = 4'(k); a_waddr = 3'(i); a_wdata = 8'($urandom); ref_a[k][i] = a_wdata;
    end
    for (int k = 0; k < 9; k++) for (int j = 0; j < 224; j++) begin
      @(negedge clk);
      b_we = 1; b_wbank = 4'(k); b_waddr = 8'(j); b_wdata = 8'($urandom); ref_b[k][j] = b_wdata;
    end
    @(negedge clk) begin a_we = 0; b_we = 0; end
    for (int i = 0; i < 224; i++) begin
      @(negedge clk);
      a_raddr = 3'(i % 8); b_raddr = 8'(i);
      @(negedge clk);   // data valid one clock after the address
      for (int k = 0; k < 9; k++) begin
        checks += 2;
        if (a_rdata[k] != ref_a[k][i % 8]) begin failures++; $display("FAIL A k=%0d i=%0d", k, i % 8); end
        if (b_rdata[k] != ref_b[k][i])     begin failures++; $display("FAIL B k=%0d j=%0d", k, i); end
      end
    end
    // overwrite one word and read it back right away
    @(negedge clk);
    b_we = 1; b_wbank = 4'd5; b_waddr = 8'd100; b_wdata = ~ref_b[5][100]; ref_b[5][100] = b_wdata;
    b_raddr = 8'd100;
    @(negedge clk);
    b_we = 0;
    @(negedge clk);
    checks++;
    if (b_rdata[5] != ref_b[5][100] || b_rdata[4] != ref_b[4][100]) begin failures++; $display("FAIL B rewrite"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
