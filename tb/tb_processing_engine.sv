// tb_processing_engine -- drives the nine-lane engine with random operands,
// partial sums and first flags, one input per cycle, and compares each
// result with a reference dot product (accumulated and clipped to 16 bits),
// checking the two-cycle latency, the tag and the clip flag. Includes full
// scale operands so that the 16-bit clip is reached in both directions.
module tb_processing_engine;
  import gemm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               in_valid, first;
  logic signed [7:0]  a [9];
  logic signed [7:0]  b [9];
  logic signed [15:0] psum;
  logic [10:0]        in_tag;
  logic               out_valid, sat;
  logic signed [15:0] result;
  logic [10:0]        out_tag;
  int checks = 0, failures = 0, clips = 0, cycle = 0;

  processing_engine dut (.clk, .rst_n, .in_valid, .first, .a, .b, .psum, .in_tag,
                         .out_valid, .result, .out_tag, .sat);

  typedef struct { int issue; int exp; bit clip; int tag; } exp_t;
  exp_t q[$];

  always @(posedge clk) cycle <= cycle + 1;

  // reference
  function automatic exp_t model(bit f, int ps, int tg);
    exp_t e;
    longint s = 0;
    for (int l = 0; l < 9; l++) s += longint'(a[l]) * longint'(b[l]);
    if (!f) s += longint'(ps);
    e.clip = (s > 32767) || (s < -32768);
    e.exp  = (s > 32767) ? 32767 : (s < -32768) ? -32768 : int'(s);
    e.tag  = tg;
    return e;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      e = q.pop_front();
      if (int'(result) != e.exp || sat != e.clip || int'(out_tag) != e.tag || cycle - e.issue != 2) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d clip=%0b tag=%0d lat=%0d exp %0d clip=%0b tag=%0d",
                                    result, sat, out_tag, cycle - e.issue, e.exp, e.clip, e.tag);
      end
      if (e.clip) clips++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; first = 0; psum = 0; in_tag = 0;
    foreach (a[l]) begin a[l] = 0; b[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      first    = $urandom_range(1);
      in_tag   = 11'($urandom);
      if (n % 50 < 3) begin
        // extremes: all products at +/-2^14, partial sum near the rails
        for (int l = 0; l < 9; l++) begin
          a[l] = -128;
          b[l] = (n % 2) ? -128 : 127;
        end
        psum = (n % 2) ? 16'sd30000 : -16'sd30000;
      end else begin
        for (int l = 0; l < 9; l++) begin a[l] = 8'($urandom); b[l] = 8'($urandom); end
        psum = 16'($urandom);
      end
      if (in_valid) q.push_back(model(first, int'(psum), int'(in_tag)));
      if (in_valid) q[$].issue = cycle;
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0 || clips == 0) begin
      failures++; $display("FAIL leftover=%0d clips=%0d", q.size(), clips);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
