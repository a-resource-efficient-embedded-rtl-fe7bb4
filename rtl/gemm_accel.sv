// gemm_accel -- dynamic fixed-point GEMM accelerator for FCN inference.
//
// The host runs im2col, activation and the rest of the iris pipeline in
// software and hands every layer's matrix product C = A x B to this block:
// A is the M x K weight matrix, B the K x N im2col feature matrix, both 8-bit
// DFP; C is written back as 8-bit DFP after moving its radix point by the
// layer's shift and saturating. Structure (after the published block
// diagram):
//
//   AXI4 (ACP) --read DMA--> Buffer A (8x9)   --\
//                        --> Buffer B (9x224) ---> processing engine
//                                                  (9 mult, adder tree,
//                                                   accumulate, mux, reg)
//                                                       |    ^ partial sums
//                                                       v    |
//   AXI4 (ACP) <--write DMA-- FIFO <-- shift & saturate <-- Buffer C (8x224x16)
//
//   AXI4-Lite slave (register file) <-- host CPU: addresses, M/K/N, shift, start
//
// Interfaces: s_axil_* is the control slave (see axil_ctrl_regs for the
// register map); m_axi_* is one AXI4 master with byte-wide INCR bursts, meant
// for a cache-coherent port; irq-free, the host polls STATUS. Timing: while
// computing, one 16-bit output partial sum per clock; all memory phases are
// serial with compute (no double buffering).
//
// Tile sizes, element widths, nine multipliers and the shift-and-saturate
// stage follow the published design; bus widths, register map, phase order
// and rounding are this design's choices.
module gemm_accel
  import gemm_pkg::*;
#(
  parameter int unsigned TM     = TILE_M,
  parameter int unsigned TK     = TILE_K,
  parameter int unsigned TN     = TILE_N,
  parameter int unsigned AXI_DW = AXI_DATA_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // AXI4-Lite control slave (host general-purpose port)
  input  logic [AXIL_ADDR_W-1:0] s_axil_awaddr,
  input  logic                 s_axil_awvalid,
  output logic                 s_axil_awready,
  input  logic [31:0]          s_axil_wdata,
  input  logic [3:0]           s_axil_wstrb,
  input  logic                 s_axil_wvalid,
  output logic                 s_axil_wready,
  output logic [1:0]           s_axil_bresp,
  output logic                 s_axil_bvalid,
  input  logic                 s_axil_bready,
  input  logic [AXIL_ADDR_W-1:0] s_axil_araddr,
  input  logic                 s_axil_arvalid,
  output logic                 s_axil_arready,
  output logic [31:0]          s_axil_rdata,
  output logic [1:0]           s_axil_rresp,
  output logic                 s_axil_rvalid,
  input  logic                 s_axil_rready,
  // AXI4 master towards the coherency port
  output logic [ADDR_W-1:0]    m_axi_araddr,
  output logic [7:0]           m_axi_arlen,
  output logic [2:0]           m_axi_arsize,
  output logic [1:0]           m_axi_arburst,
  output logic [3:0]           m_axi_arcache,
  output logic [2:0]           m_axi_arprot,
  output logic                 m_axi_arvalid,
  input  logic                 m_axi_arready,
  input  logic [AXI_DW-1:0]    m_axi_rdata,
  input  logic [1:0]           m_axi_rresp,
  input  logic                 m_axi_rlast,
  input  logic                 m_axi_rvalid,
  output logic                 m_axi_rready,
  output logic [ADDR_W-1:0]    m_axi_awaddr,
  output logic [7:0]           m_axi_awlen,
  output logic [2:0]           m_axi_awsize,
  output logic [1:0]           m_axi_awburst,
  output logic [3:0]           m_axi_awcache,
  output logic [2:0]           m_axi_awprot,
  output logic                 m_axi_awvalid,
  input  logic                 m_axi_awready,
  output logic [AXI_DW-1:0]    m_axi_wdata,
  output logic [AXI_DW/8-1:0]  m_axi_wstrb,
  output logic                 m_axi_wlast,
  output logic                 m_axi_wvalid,
  input  logic                 m_axi_wready,
  input  logic [1:0]           m_axi_bresp,
  input  logic                 m_axi_bvalid,
  output logic                 m_axi_bready,
  // observation of internal events (for counters / debug)
  output logic                 pe_fire,      // engine accepted an input (9 MACs)
  output logic                 sat_event,    // an output was clipped to 8 bits
  output logic                 acc_clip      // a 16-bit partial sum was clipped
);

  localparam int unsigned LEN_W      = 16;
  localparam int unsigned FIFO_DEPTH = 4;
  localparam int unsigned A_AW  = (TM > 1) ? $clog2(TM) : 1;
  localparam int unsigned B_AW  = (TN > 1) ? $clog2(TN) : 1;
  localparam int unsigned K_BW  = (TK > 1) ? $clog2(TK) : 1;
  localparam int unsigned C_AW  = $clog2(TM * TN);
  localparam int unsigned LVL_W = $clog2(FIFO_DEPTH + 1);

  // ---- control registers ----
  gemm_cfg_t cfg;
  logic      start, busy, job_done, job_err;

  axil_ctrl_regs u_regs (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .cfg, .start, .busy, .job_done, .job_err
  );

  // ---- controller ----
  shift_t              shift;
  logic                rd_start, rd_done, rd_err, rd_valid;
  logic [ADDR_W-1:0]   rd_addr, wr_addr;
  logic [LEN_W-1:0]    rd_len, rd_idx, wr_len;
  logic [7:0]          rd_data, ab_wdata;
  logic                a_we, b_we, c_re;
  logic [K_BW-1:0]     a_wbank, b_wbank;
  logic [A_AW-1:0]     a_waddr, a_raddr;
  logic [B_AW-1:0]     b_waddr, b_raddr;
  logic [C_AW-1:0]     c_raddr, pe_tag;
  logic                pe_valid, pe_first;
  logic [K_BW:0]       lanes;
  logic                fifo_push;
  logic [LVL_W-1:0]    fifo_level;
  logic                wr_start, wr_done, wr_err;

  gemm_controller #(.TM(TM), .TK(TK), .TN(TN), .FIFO_DEPTH(FIFO_DEPTH), .LEN_W(LEN_W)) u_ctrl (
    .clk, .rst_n,
    .cfg, .start, .busy, .done(job_done), .err(job_err), .shift,
    .rd_start, .rd_addr, .rd_len, .rd_done, .rd_err, .rd_valid, .rd_data, .rd_idx,
    .a_we, .a_wbank, .a_waddr, .b_we, .b_wbank, .b_waddr, .ab_wdata,
    .a_raddr, .b_raddr, .c_re, .c_raddr,
    .pe_valid, .pe_first, .pe_tag, .lanes,
    .fifo_push, .fifo_level,
    .wr_start, .wr_addr, .wr_len, .wr_done, .wr_err
  );

  // ---- DMA engines on the coherency port ----
  logic rd_busy, wr_busy;

  acp_read_dma #(.DW(AXI_DW), .LEN_W(LEN_W)) u_rd_dma (
    .clk, .rst_n,
    .start(rd_start), .addr(rd_addr), .len(rd_len),
    .busy(rd_busy), .done(rd_done), .err(rd_err),
    .out_valid(rd_valid), .out_data(rd_data), .out_idx(rd_idx),
    .m_axi_araddr, .m_axi_arlen, .m_axi_arsize, .m_axi_arburst, .m_axi_arcache,
    .m_axi_arprot, .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rresp, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready
  );

  logic       wq_valid, wq_ready;
  logic [7:0] wq_data;

  acp_write_dma #(.DW(AXI_DW), .LEN_W(LEN_W)) u_wr_dma (
    .clk, .rst_n,
    .start(wr_start), .addr(wr_addr), .len(wr_len),
    .busy(wr_busy), .done(wr_done), .err(wr_err),
    .in_valid(wq_valid), .in_data(wq_data), .in_ready(wq_ready),
    .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst, .m_axi_awcache,
    .m_axi_awprot, .m_axi_awvalid, .m_axi_awready,
    .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast, .m_axi_wvalid, .m_axi_wready,
    .m_axi_bresp, .m_axi_bvalid, .m_axi_bready
  );

  // ---- Buffers A and B ----
  logic [DATA_W-1:0] a_rdata [TK];
  logic [DATA_W-1:0] b_rdata [TK];

  banked_buffer #(.BANKS(TK), .DEPTH(TM), .WIDTH(DATA_W)) u_buf_a (
    .clk, .we(a_we), .wbank(a_wbank), .waddr(a_waddr), .wdata(ab_wdata),
    .raddr(a_raddr), .rdata(a_rdata)
  );

  banked_buffer #(.BANKS(TK), .DEPTH(TN), .WIDTH(DATA_W)) u_buf_b (
    .clk, .we(b_we), .wbank(b_wbank), .waddr(b_waddr), .wdata(ab_wdata),
    .raddr(b_raddr), .rdata(b_rdata)
  );

  // Lanes beyond the valid depth of an edge k tile see a zero weight
  logic signed [DATA_W-1:0] pe_a [TK];
  logic signed [DATA_W-1:0] pe_b [TK];
  always_comb begin
    for (int l = 0; l < TK; l++) begin
      pe_a[l] = ((K_BW + 1)'(l) < lanes) ? a_rdata[l] : '0;
      pe_b[l] = b_rdata[l];
    end
  end

  // ---- Buffer C and the processing engine ----
  logic [ACC_W-1:0]        c_rdata;
  logic                    res_valid, res_sat;
  logic signed [ACC_W-1:0] res;
  logic [C_AW-1:0]         res_tag;

  processing_engine #(.LANES(TK), .IN_W(DATA_W), .OUT_W(ACC_W), .TAG_W(C_AW)) u_pe (
    .clk, .rst_n,
    .in_valid(pe_valid), .first(pe_first), .a(pe_a), .b(pe_b),
    .psum(c_rdata), .in_tag(pe_tag),
    .out_valid(res_valid), .result(res), .out_tag(res_tag), .sat(res_sat)
  );

  acc_buffer #(.DEPTH(TM * TN), .WIDTH(ACC_W)) u_buf_c (
    .clk, .we(res_valid), .waddr(res_tag), .wdata(res),
    .re(c_re), .raddr(c_raddr), .rdata(c_rdata)
  );

  // ---- drain: shift & saturate, then FIFO to the write DMA ----
  logic signed [DATA_W-1:0] c_out8;
  logic                     c_out_sat;

  shift_saturate #(.IN_W(ACC_W), .OUT_W(DATA_W), .SH_W(SHIFT_W)) u_shsat (
    .din(c_rdata), .shift(shift), .dout(c_out8), .sat(c_out_sat)
  );

  stream_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push(fifo_push), .din(c_out8),
    .out_valid(wq_valid), .dout(wq_data), .out_ready(wq_ready),
    .level(fifo_level)
  );

  assign pe_fire   = pe_valid;
  assign sat_event = fifo_push & c_out_sat;
  assign acc_clip  = res_valid & res_sat;

  // The two DMA engines are only started while idle
  a_rd_idle: assert property (@(posedge clk) disable iff (!rst_n) rd_start |-> !rd_busy);
  a_wr_idle: assert property (@(posedge clk) disable iff (!rst_n) wr_start |-> !wr_busy);

endmodule
