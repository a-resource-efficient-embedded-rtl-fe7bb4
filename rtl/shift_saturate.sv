// shift_saturate -- re-scales a 16-bit accumulator to an 8-bit DFP output.
//
// In dynamic fixed point every layer has its own radix-point position, so the
// product of a weight with fractional length w_fl and an input with a_in
// carries w_fl + a_in fractional bits, while the layer output must carry
// a_out. This block shifts by shift = w_fl + a_in - a_out (positive: right,
// arithmetic, rounding toward minus infinity; negative: left) and saturates
// the result into the signed 8-bit range [-128, 127]. That the result is
// shifted and then saturated to 8 bits is the published design; the shift
// encoding and the truncating rounding are this design's choices.
//
// Purely combinational.
module shift_saturate
  import gemm_pkg::*;
#(
  parameter int unsigned IN_W  = ACC_W,
  parameter int unsigned OUT_W = DATA_W,
  parameter int unsigned SH_W  = SHIFT_W
) (
  input  logic signed [IN_W-1:0]  din,
  input  logic signed [SH_W-1:0]  shift,
  output logic signed [OUT_W-1:0] dout,
  output logic                    sat     // high when the value was clipped
);

  // Wide enough to hold din shifted left by the largest left shift
  localparam int unsigned WIDE_W = IN_W + (1 << (SH_W - 1));
  localparam logic signed [WIDE_W-1:0] MAX_OUT = WIDE_W'((1 << (OUT_W - 1)) - 1);
  localparam logic signed [WIDE_W-1:0] MIN_OUT = -WIDE_W'(1 << (OUT_W - 1));

  logic signed [WIDE_W-1:0] wide, shifted;
  logic        [SH_W-1:0]   mag;

  always_comb begin
    wide = WIDE_W'(din);
    mag  = shift[SH_W-1] ? SH_W'(-shift) : SH_W'(shift);
    if (shift[SH_W-1]) shifted = wide <<< mag;
    else               shifted = wide >>> mag;
    sat = 1'b0;
    if (shifted > MAX_OUT) begin
      dout = OUT_W'(MAX_OUT);
      sat  = 1'b1;
    end else if (shifted < MIN_OUT) begin
      dout = OUT_W'(MIN_OUT);
      sat  = 1'b1;
    end else begin
      dout = OUT_W'(shifted);
    end
  end

endmodule
