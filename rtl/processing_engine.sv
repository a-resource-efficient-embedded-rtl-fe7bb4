// processing_engine -- nine-lane DFP multiply / adder-tree / accumulate unit.
//
// Each cycle it takes one row slice a[0..8] of weight tile A, one column slice
// b[0..8] of feature tile B and the partial sum psum of the same output
// element read from Buffer C. The nine products are formed in parallel and
// reduced by an adder tree (eight two-input adders); one further adder adds
// the tree result to the partial sum, and a multiplexer chooses between that
// sum and the bare tree result (first K tile of an output, when there is no
// partial sum yet). The chosen value is registered and written back to
// Buffer C. Nine multipliers, the adder tree, the accumulate adder, the mux
// and the output register follow the published engine; the pipeline split
// and the 16-bit saturation of the accumulation are this design's choices.
//
// Timing: fully pipelined, one input per cycle, result two cycles after the
// input (stage 1 registers the tree sum, stage 2 the accumulated result).
// tag travels with the data (used for the Buffer C write address).
module processing_engine
  import gemm_pkg::*;
#(
  parameter int unsigned LANES = TILE_K,
  parameter int unsigned IN_W  = DATA_W,
  parameter int unsigned OUT_W = ACC_W,
  parameter int unsigned TAG_W = 11
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    first,        // 1: ignore psum (start of accumulation)
  input  logic signed [IN_W-1:0]  a [LANES],
  input  logic signed [IN_W-1:0]  b [LANES],
  input  logic signed [OUT_W-1:0] psum,
  input  logic [TAG_W-1:0]        in_tag,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] result,
  output logic [TAG_W-1:0]        out_tag,
  output logic                    sat           // result was clipped to OUT_W bits
);

  localparam int unsigned PROD_W = 2 * IN_W;
  localparam int unsigned TREE_W = PROD_W + $clog2(LANES);
  localparam int unsigned SUM_W  = TREE_W + 1;
  localparam logic signed [SUM_W-1:0] MAX_OUT = SUM_W'((1 << (OUT_W - 1)) - 1);
  localparam logic signed [SUM_W-1:0] MIN_OUT = -SUM_W'(1 << (OUT_W - 1));

  // ---- multipliers and adder tree (combinational, before stage 1) ----
  logic signed [TREE_W-1:0] prod [LANES];
  logic signed [TREE_W-1:0] tree_sum;

  always_comb begin
    for (int l = 0; l < LANES; l++) prod[l] = TREE_W'(a[l] * b[l]);
  end

  adder_tree #(.N(LANES), .W(TREE_W)) u_tree (.din(prod), .sum(tree_sum));

  // ---- stage 1 ----
  logic                     s1_valid, s1_first;
  logic signed [TREE_W-1:0] s1_tree;
  logic signed [OUT_W-1:0]  s1_psum;
  logic [TAG_W-1:0]         s1_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_tree  <= '0;
      s1_psum  <= '0;
      s1_tag   <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_first <= first;
      s1_tree  <= tree_sum;
      s1_psum  <= psum;
      s1_tag   <= in_tag;
    end
  end

  // ---- accumulate adder, select mux, saturation ----
  logic signed [SUM_W-1:0] acc_sum, sel;
  logic signed [OUT_W-1:0] sel_sat;
  logic                    sel_clip;

  always_comb begin
    acc_sum = SUM_W'(s1_tree) + SUM_W'(s1_psum);
    sel     = s1_first ? SUM_W'(s1_tree) : acc_sum;
    sel_clip = 1'b1;
    if (sel > MAX_OUT)      sel_sat = OUT_W'(MAX_OUT);
    else if (sel < MIN_OUT) sel_sat = OUT_W'(MIN_OUT);
    else begin
      sel_sat  = OUT_W'(sel);
      sel_clip = 1'b0;
    end
  end

  // ---- stage 2: output register ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      result    <= '0;
      out_tag   <= '0;
      sat       <= 1'b0;
    end else begin
      out_valid <= s1_valid;
      result    <= sel_sat;
      out_tag   <= s1_tag;
      sat       <= s1_valid & sel_clip;
    end
  end

endmodule
