// adder_tree -- balanced binary reduction of N signed W-bit operands.
//
// Helper of the processing engine. Level by level, neighbouring pairs are
// summed and an odd operand is passed up unchanged, so N operands take N-1
// two-input adders (eight for the nine products of the engine) in
// ceil(log2(N)) levels. The caller sizes W so that the sum cannot overflow.
// Combinational.
module adder_tree #(
  parameter int unsigned N = 9,
  parameter int unsigned W = 20
) (
  input  logic signed [W-1:0] din [N],
  output logic signed [W-1:0] sum
);

  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1;

  logic signed [W-1:0] node [LEVELS + 1][N];

  always_comb begin
    int unsigned cnt;
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < N; i++) node[l][i] = '0;
    for (int i = 0; i < N; i++) node[0][i] = din[i];
    cnt = N;
    for (int l = 0; l < LEVELS; l++) begin
      for (int i = 0; i < N / 2 + 1; i++) begin
        if (2 * i + 1 < cnt)      node[l + 1][i] = node[l][2 * i] + node[l][2 * i + 1];
        else if (2 * i + 1 == cnt) node[l + 1][i] = node[l][2 * i];
      end
      cnt = (cnt + 1) / 2;
    end
    sum = node[LEVELS][0];
  end

endmodule
