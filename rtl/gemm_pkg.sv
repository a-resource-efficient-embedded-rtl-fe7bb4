// gemm_pkg -- types and constants shared by the dynamic fixed-point (DFP)
// GEMM accelerator.
//
// The accelerator multiplies an M x K weight matrix A by a K x N feature
// matrix B (both 8-bit DFP) and writes the M x N product C, re-scaled to
// 8-bit DFP, back to memory. It works on tiles: A is held 8 x 9, B 9 x 224
// and C 8 x 224 on chip. The element widths (8-bit A and B, 16-bit C) and the
// tile sizes are those of the published design; the AXI widths, the register
// map and the shift range are this implementation's choices.
package gemm_pkg;

  // Element widths (published: A and B are 8-bit, C is 16-bit)
  localparam int unsigned DATA_W = 8;
  localparam int unsigned ACC_W  = 16;

  // Tile sizes (published: A 8x9, B 9x224, C 8x224)
  localparam int unsigned TILE_M = 8;
  localparam int unsigned TILE_K = 9;
  localparam int unsigned TILE_N = 224;

  // Bus widths (own choice: the ACP of the target SoC is a 64-bit AXI port)
  localparam int unsigned ADDR_W     = 32;
  localparam int unsigned AXI_DATA_W = 64;
  localparam int unsigned AXIL_ADDR_W = 6;

  // Radix-point shift applied to C before saturation, as a signed count:
  // positive shifts right, negative shifts left.
  localparam int unsigned SHIFT_W = 6;

  typedef logic signed [DATA_W-1:0] dfp8_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [SHIFT_W-1:0] shift_t;

  // Register map of the control slave (byte offsets)
  localparam logic [AXIL_ADDR_W-1:0] REG_CTRL   = 6'h00; // bit0: start (write 1)
  localparam logic [AXIL_ADDR_W-1:0] REG_STATUS = 6'h04; // bit0 busy, bit1 done, bit2 bus error
  localparam logic [AXIL_ADDR_W-1:0] REG_A_ADDR = 6'h08;
  localparam logic [AXIL_ADDR_W-1:0] REG_B_ADDR = 6'h0C;
  localparam logic [AXIL_ADDR_W-1:0] REG_C_ADDR = 6'h10;
  localparam logic [AXIL_ADDR_W-1:0] REG_M      = 6'h14;
  localparam logic [AXIL_ADDR_W-1:0] REG_K      = 6'h18;
  localparam logic [AXIL_ADDR_W-1:0] REG_N      = 6'h1C;
  localparam logic [AXIL_ADDR_W-1:0] REG_SHIFT  = 6'h20;

  // One GEMM job as programmed by the host
  typedef struct packed {
    logic [ADDR_W-1:0] a_addr;
    logic [ADDR_W-1:0] b_addr;
    logic [ADDR_W-1:0] c_addr;
    logic [31:0]       m;
    logic [31:0]       k;
    logic [31:0]       n;
    shift_t            shift;
  } gemm_cfg_t;

  // AXI4 constants
  localparam logic [1:0] AXI_BURST_INCR = 2'b01;
  localparam logic [1:0] AXI_RESP_OKAY  = 2'b00;
  // ACP coherent access: write-back, read/write-allocate cacheable
  localparam logic [3:0] ACP_CACHE      = 4'b1111;

endpackage
