// tb_shift_saturate -- checks the DFP re-scaling unit against an integer
// reference: floor(din / 2^s) for s >= 0, din * 2^-s for s < 0, clipped to
// [-128, 127]. Corner values, every shift and random inputs.
module tb_shift_saturate;
  import gemm_pkg::*;

  logic signed [15:0] din;
  logic signed [5:0]  shift;
  logic signed [7:0]  dout;
  logic               sat;
  int checks = 0, failures = 0;

  shift_saturate dut (.din, .shift, .dout, .sat);

  function automatic longint ref_val(longint x, int s);
    longint v;
    if (s >= 0) begin
      v = x;
      for (int i = 0; i < s; i++) v = (v < 0 && (v % 2 != 0)) ? (v - 1) / 2 : v / 2;
    end else v = x * (64'sd1 <<< (-s));
    return v;
  endfunction

  task automatic try(int x, int s);
    longint v, e;
    bit es;
    din = 16'(x); shift = 6'(s);
    #1;
    v  = ref_val(longint'(x), s);
    es = (v > 127) || (v < -128);
    e  = (v > 127) ? 127 : (v < -128) ? -128 : v;
    checks++;
    if (longint'(dout) != e || sat != es) begin
      failures++;
      if (failures < 10) $display("FAIL din=%0d shift=%0d got %0d/%0b exp %0d/%0b", x, s, dout, sat, e, es);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int corner[] = '{0, 1, -1, 127, 128, -128, -129, 255, 256, -256, 32767, -32768, 1000, -1000, 5, -5};
    foreach (corner[i]) for (int s = -32; s < 32; s++) try(corner[i], s);
    repeat (5000) try($urandom_range(65535) - 32768, int'($urandom_range(63)) - 32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
