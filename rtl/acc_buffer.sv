// acc_buffer -- Buffer C, the output tile buffer of partial sums.
//
// Holds one 8 x 224 tile of 16-bit results (word address = row*224 + col).
// While the K dimension is swept in steps of nine, each partial sum is read
// here, added to the next nine-term dot product in the processing engine and
// written back, until the tile is complete and is drained to memory. The
// 16-bit width and the 8 x 224 size are the published ones; the two-port
// organisation is this design's choice.
//
// Interface: one synchronous read port (data one cycle after raddr) and one
// write port; both can be used every cycle. Reading and writing the same word
// in one cycle returns the old contents.
module acc_buffer #(
  parameter int unsigned DEPTH = gemm_pkg::TILE_M * gemm_pkg::TILE_N,
  parameter int unsigned WIDTH = gemm_pkg::ACC_W,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
