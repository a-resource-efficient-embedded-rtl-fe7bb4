// acp_read_dma -- AXI4 read master that streams a run of bytes from memory.
//
// The accelerator reaches system memory through the processor's Accelerator
// Coherency Port (ACP), an AXI4 slave; this DMA fills Buffers A and B from it.
// A command names a byte address and a byte count (one row of an A or B
// tile). The run is split into INCR bursts of one-byte beats (ARSIZE = 0),
// each at most 256 beats and never crossing a 4 KB boundary, as AXI4
// requires. On a bus of AXI_DATA_W bits a byte sits on the lane given by the
// low address bits, which advance by one each beat. Every byte received is
// presented on out_valid/out_data with its position out_idx in the run.
// That a DMA on the ACP fills the buffers is the published design; the
// byte-wide bursts and one burst in flight at a time are this design's
// choices (simple and correct for any alignment, not the fastest).
//
// Interface: pulse start with addr/len while idle (busy low); out_valid has
// no back-pressure; done pulses in the same cycle as the last byte. err is set
// when any read response is not OKAY and cleared by the next start.
module acp_read_dma
  import gemm_pkg::*;
#(
  parameter int unsigned AW    = ADDR_W,
  parameter int unsigned DW    = AXI_DATA_W,
  parameter int unsigned LEN_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              start,
  input  logic [AW-1:0]     addr,
  input  logic [LEN_W-1:0]  len,
  output logic              busy,
  output logic              done,
  output logic              err,
  // byte stream out
  output logic              out_valid,
  output logic [7:0]        out_data,
  output logic [LEN_W-1:0]  out_idx,
  // AXI4 read address channel
  output logic [AW-1:0]     m_axi_araddr,
  output logic [7:0]        m_axi_arlen,
  output logic [2:0]        m_axi_arsize,
  output logic [1:0]        m_axi_arburst,
  output logic [3:0]        m_axi_arcache,
  output logic [2:0]        m_axi_arprot,
  output logic              m_axi_arvalid,
  input  logic              m_axi_arready,
  // AXI4 read data channel
  input  logic [DW-1:0]     m_axi_rdata,
  input  logic [1:0]        m_axi_rresp,
  input  logic              m_axi_rlast,
  input  logic              m_axi_rvalid,
  output logic              m_axi_rready
);

  localparam int unsigned LANE_W = $clog2(DW / 8);

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA} state_t;
  state_t state;

  logic [AW-1:0]    cur_addr;    // address of the next beat
  logic [LEN_W-1:0] remaining;   // bytes not yet requested
  logic [LEN_W-1:0] idx;         // index of the next byte received
  logic [8:0]       burst_len;   // beats of the burst being issued (1..256)

  // Largest burst allowed from cur_addr: 256 beats, 4 KB boundary, remaining
  logic [12:0] to_4k;
  always_comb begin
    to_4k     = 13'd4096 - 13'(cur_addr[11:0]);
    burst_len = 9'd256;
    if (LEN_W'(burst_len) > remaining) burst_len = 9'(remaining);
    if (13'(burst_len) > to_4k)        burst_len = 9'(to_4k);
  end

  assign busy          = (state != S_IDLE);
  assign m_axi_arsize  = 3'd0;
  assign m_axi_arburst = AXI_BURST_INCR;
  assign m_axi_arcache = ACP_CACHE;
  assign m_axi_arprot  = 3'b000;
  assign m_axi_rready  = (state == S_DATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      cur_addr      <= '0;
      remaining     <= '0;
      idx           <= '0;
      done          <= 1'b0;
      err           <= 1'b0;
      out_valid     <= 1'b0;
      out_data      <= '0;
      out_idx       <= '0;
      m_axi_araddr  <= '0;
      m_axi_arlen   <= '0;
      m_axi_arvalid <= 1'b0;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cur_addr  <= addr;
          remaining <= len;
          idx       <= '0;
          err       <= 1'b0;
          if (len == '0) done <= 1'b1;
          else           state <= S_ADDR;
        end
        S_ADDR: begin
          if (!m_axi_arvalid) begin
            m_axi_araddr  <= cur_addr;
            m_axi_arlen   <= 8'(burst_len - 9'd1);
            m_axi_arvalid <= 1'b1;
            remaining     <= remaining - LEN_W'(burst_len);
          end else if (m_axi_arready) begin
            m_axi_arvalid <= 1'b0;
            state         <= S_DATA;
          end
        end
        S_DATA: if (m_axi_rvalid) begin
          out_valid <= 1'b1;
          out_data  <= m_axi_rdata[8*cur_addr[LANE_W-1:0] +: 8];
          out_idx   <= idx;
          idx       <= idx + 1'b1;
          cur_addr  <= cur_addr + 1'b1;
          if (m_axi_rresp != AXI_RESP_OKAY) err <= 1'b1;
          if (m_axi_rlast) begin
            if (remaining == '0) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_ADDR;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI4: address and control stay stable while ARVALID waits for ARREADY
  property p_ar_stable;
    @(posedge clk) disable iff (!rst_n)
      m_axi_arvalid && !m_axi_arready |=> m_axi_arvalid && $stable(m_axi_araddr) && $stable(m_axi_arlen);
  endproperty
  a_ar_stable: assert property (p_ar_stable);
  // A burst never crosses a 4 KB boundary
  a_ar_4k: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_arvalid |-> (13'(m_axi_araddr[11:0]) + 13'(m_axi_arlen) < 13'd4096));

endmodule
