// banked_buffer -- on-chip tiling buffer split into parallel banks.
//
// Used twice in the accelerator: as Buffer A (weights, 9 banks of 8 bytes)
// and as Buffer B (input features, 9 banks of 224 bytes). Bank k holds the
// elements of reduction index k, so one read address returns the nine
// operands that the nine multipliers of the processing engine consume in
// the same cycle. The published design partitions its block RAM into banks
// per multiplier in this way; the port arrangement is this design's choice.
//
// Interface: one write port that stores a single element into one bank
// (filled element by element by the DMA), and one read port whose address is
// shared by all banks. Timing: synchronous read, data one cycle after raddr;
// a write is visible to a read issued in a later cycle.
module banked_buffer #(
  parameter int unsigned BANKS  = gemm_pkg::TILE_K,
  parameter int unsigned DEPTH  = gemm_pkg::TILE_N,
  parameter int unsigned WIDTH  = gemm_pkg::DATA_W,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned BW    = (BANKS > 1) ? $clog2(BANKS) : 1
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [BW-1:0]           wbank,
  input  logic [AW-1:0]           waddr,
  input  logic [WIDTH-1:0]        wdata,
  input  logic [AW-1:0]           raddr,
  output logic [WIDTH-1:0]        rdata [BANKS]
);

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && (wbank == BW'(b))) mem[waddr] <= wdata;
      rdata[b] <= mem[raddr];
    end
  end

endmodule
