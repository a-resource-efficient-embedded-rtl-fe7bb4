// acp_write_dma -- AXI4 write master that stores a run of bytes to memory.
//
// Drains the finished output tile: a command names a byte address and a byte
// count (one row of the C tile), and the bytes arrive on a valid/ready stream
// after shift-and-saturate. The run is split into INCR bursts of one-byte
// beats (AWSIZE = 0), at most 256 beats each and never crossing a 4 KB
// boundary. Each beat places its byte on the lane given by the low address
// bits and sets only that lane's strobe. One burst is in flight at a time and
// the write response of each burst is awaited before the next begins. Writing
// the tile back through the ACP is the published design; the burst shape is
// this design's choice.
//
// Interface: pulse start with addr/len while idle (busy low); done pulses
// once the last write response has arrived. err is set by any non-OKAY
// response and cleared by the next start.
module acp_write_dma
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
  // byte stream in
  input  logic              in_valid,
  input  logic [7:0]        in_data,
  output logic              in_ready,
  // AXI4 write address channel
  output logic [AW-1:0]     m_axi_awaddr,
  output logic [7:0]        m_axi_awlen,
  output logic [2:0]        m_axi_awsize,
  output logic [1:0]        m_axi_awburst,
  output logic [3:0]        m_axi_awcache,
  output logic [2:0]        m_axi_awprot,
  output logic              m_axi_awvalid,
  input  logic              m_axi_awready,
  // AXI4 write data channel
  output logic [DW-1:0]     m_axi_wdata,
  output logic [DW/8-1:0]   m_axi_wstrb,
  output logic              m_axi_wlast,
  output logic              m_axi_wvalid,
  input  logic              m_axi_wready,
  // AXI4 write response channel
  input  logic [1:0]        m_axi_bresp,
  input  logic              m_axi_bvalid,
  output logic              m_axi_bready
);

  localparam int unsigned LANE_W = $clog2(DW / 8);

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA, S_RESP} state_t;
  state_t state;

  logic [AW-1:0]    cur_addr;     // address of the next beat
  logic [LEN_W-1:0] remaining;    // bytes not yet assigned to a burst
  logic [8:0]       beats_left;   // beats still to send in this burst
  logic [8:0]       burst_len;

  logic [12:0] to_4k;
  always_comb begin
    to_4k     = 13'd4096 - 13'(cur_addr[11:0]);
    burst_len = 9'd256;
    if (LEN_W'(burst_len) > remaining) burst_len = 9'(remaining);
    if (13'(burst_len) > to_4k)        burst_len = 9'(to_4k);
  end

  assign busy          = (state != S_IDLE);
  assign m_axi_awsize  = 3'd0;
  assign m_axi_awburst = AXI_BURST_INCR;
  assign m_axi_awcache = ACP_CACHE;
  assign m_axi_awprot  = 3'b000;
  assign m_axi_bready  = (state == S_RESP);

  // W channel: a beat is offered straight from the input stream
  assign m_axi_wvalid = (state == S_DATA) && in_valid;
  assign in_ready     = (state == S_DATA) && m_axi_wready;
  assign m_axi_wlast  = (beats_left == 9'd1);
  always_comb begin
    m_axi_wdata = '0;
    m_axi_wstrb = '0;
    m_axi_wdata[8*cur_addr[LANE_W-1:0] +: 8] = in_data;
    m_axi_wstrb[cur_addr[LANE_W-1:0]]        = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      cur_addr      <= '0;
      remaining     <= '0;
      beats_left    <= '0;
      done          <= 1'b0;
      err           <= 1'b0;
      m_axi_awaddr  <= '0;
      m_axi_awlen   <= '0;
      m_axi_awvalid <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cur_addr  <= addr;
          remaining <= len;
          err       <= 1'b0;
          if (len == '0) done <= 1'b1;
          else           state <= S_ADDR;
        end
        S_ADDR: begin
          if (!m_axi_awvalid) begin
            m_axi_awaddr  <= cur_addr;
            m_axi_awlen   <= 8'(burst_len - 9'd1);
            m_axi_awvalid <= 1'b1;
            beats_left    <= burst_len;
            remaining     <= remaining - LEN_W'(burst_len);
          end else if (m_axi_awready) begin
            m_axi_awvalid <= 1'b0;
            state         <= S_DATA;
          end
        end
        S_DATA: if (m_axi_wvalid && m_axi_wready) begin
          cur_addr   <= cur_addr + 1'b1;
          beats_left <= beats_left - 1'b1;
          if (beats_left == 9'd1) state <= S_RESP;
        end
        S_RESP: if (m_axi_bvalid) begin
          if (m_axi_bresp != AXI_RESP_OKAY) err <= 1'b1;
          if (remaining == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_ADDR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI4: a pending write beat stays stable until accepted
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_wvalid && !m_axi_wready |=> m_axi_wvalid && $stable(m_axi_wdata) && $stable(m_axi_wstrb));
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_awvalid && !m_axi_awready |=> m_axi_awvalid && $stable(m_axi_awaddr) && $stable(m_axi_awlen));
  a_aw_4k: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_awvalid |-> (13'(m_axi_awaddr[11:0]) + 13'(m_axi_awlen) < 13'd4096));

endmodule
