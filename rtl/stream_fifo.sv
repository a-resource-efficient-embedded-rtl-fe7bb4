// stream_fifo -- small synchronous FIFO with valid/ready output.
//
// Helper of the accelerator top: decouples the fixed-latency Buffer C read
// (through shift-and-saturate) from the write DMA, which may stall on the
// AXI W channel. The writer must not push when full; the controller ensures
// this by counting level plus reads in flight. Output data is the head
// entry, shown while out_valid is high; a pop happens on out_valid && out_ready.
module stream_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic             out_valid,
  output logic [WIDTH-1:0] dout,
  input  logic             out_ready,
  output logic [LW-1:0]    level
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic             pop;

  assign out_valid = (level != '0);
  assign dout      = mem[rp];
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      level <= level + LW'(push) - LW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= din;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (level < LW'(DEPTH)) || pop);

endmodule
