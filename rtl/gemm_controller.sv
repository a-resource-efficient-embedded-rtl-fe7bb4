// gemm_controller -- tile sequencer of the DFP GEMM accelerator.
//
// Computes C = A x B for an M x K matrix A and a K x N matrix B held
// row-major in memory (8-bit elements, leading dimensions K, N and N), in
// tiles of TM x TK of A, TK x TN of B and TM x TN of C. It realises the
// published loop nest "for i, for j: sum over k of A[i][k]*B[k][j];
// C[i][j] += sum" as
//
//   for each row tile i0 (step TM), for each column tile j0 (step TN):
//     for each k tile k0 (step TK):
//       load A[i0.., k0..] into Buffer A, one row per DMA command
//       load B[k0.., j0..] into Buffer B, one row per DMA command
//       for r < rows, j < cols: one engine issue per cycle, the engine adds
//         the nine-term dot product to the partial sum C[r][j] of Buffer C
//         (the first k tile starts from zero)
//     write the tile back, row by row, through shift-and-saturate
//
// Edge tiles are handled by computing only the valid rows and columns and by
// telling the datapath how many of the nine lanes are valid (kc); the other
// lanes are forced to zero outside this block. The loop order, the one-by-one
// phases (no double buffering) and the edge handling are this design's
// choices; the paper gives the loop nest, the buffer sizes and that partial
// sums stay in Buffer C until complete.
//
// Timing: the compute phase issues one output element per clock (nine
// multiply-accumulates per clock). Buffer reads have one cycle of latency,
// so pe_valid/pe_first/pe_tag are registered copies of the issue.
module gemm_controller
  import gemm_pkg::*;
#(
  parameter int unsigned TM         = TILE_M,
  parameter int unsigned TK         = TILE_K,
  parameter int unsigned TN         = TILE_N,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned LEN_W      = 16,
  localparam int unsigned A_AW  = (TM > 1) ? $clog2(TM) : 1,
  localparam int unsigned B_AW  = (TN > 1) ? $clog2(TN) : 1,
  localparam int unsigned K_BW  = (TK > 1) ? $clog2(TK) : 1,
  localparam int unsigned C_AW  = $clog2(TM * TN),
  localparam int unsigned LVL_W = $clog2(FIFO_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // job
  input  gemm_cfg_t         cfg,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              err,
  output shift_t            shift,       // shift of the running job
  // read DMA
  output logic              rd_start,
  output logic [ADDR_W-1:0] rd_addr,
  output logic [LEN_W-1:0]  rd_len,
  input  logic              rd_done,
  input  logic              rd_err,
  input  logic              rd_valid,
  input  logic [7:0]        rd_data,
  input  logic [LEN_W-1:0]  rd_idx,
  // Buffer A / Buffer B write ports
  output logic              a_we,
  output logic [K_BW-1:0]   a_wbank,
  output logic [A_AW-1:0]   a_waddr,
  output logic              b_we,
  output logic [K_BW-1:0]   b_wbank,
  output logic [B_AW-1:0]   b_waddr,
  output logic [7:0]        ab_wdata,
  // Buffer A / B / C read ports
  output logic [A_AW-1:0]   a_raddr,
  output logic [B_AW-1:0]   b_raddr,
  output logic              c_re,
  output logic [C_AW-1:0]   c_raddr,
  // processing engine control (aligned with buffer read data)
  output logic              pe_valid,
  output logic              pe_first,
  output logic [C_AW-1:0]   pe_tag,
  output logic [K_BW:0]     lanes,       // valid lanes of the current k tile
  // drain path: Buffer C -> shift/saturate -> FIFO -> write DMA
  output logic              fifo_push,   // C read data of last cycle is to be pushed
  input  logic [LVL_W-1:0]  fifo_level,
  output logic              wr_start,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [LEN_W-1:0]  wr_len,
  input  logic              wr_done,
  input  logic              wr_err
);

  typedef enum logic [3:0] {
    S_IDLE, S_TILE, S_KTILE, S_LA_ISSUE, S_LA_WAIT, S_LB_ISSUE, S_LB_WAIT,
    S_COMPUTE, S_FLUSH, S_WB_ISSUE, S_WB_RUN, S_NEXT, S_DONE
  } state_t;
  state_t state;

  gemm_cfg_t   job;
  logic [31:0] i0, j0, k0;
  logic [31:0] mc, nc, kc;          // valid rows / cols / lanes of current tile
  logic [31:0] r;                   // row counter (A rows, compute rows, write rows)
  logic [31:0] kk;                  // B row counter
  logic [31:0] jj;                  // column counter (compute, drain)
  logic [31:0] drained;             // C elements of the current row sent to the FIFO
  logic [1:0]  flush_cnt;
  logic        err_acc;

  function automatic logic [31:0] min32(logic [31:0] x, logic [31:0] y);
    return (x < y) ? x : y;
  endfunction

  // ---- issue signals (combinational) ----
  logic issue;       // compute issue this cycle
  logic drain_rd;    // drain read of Buffer C this cycle
  always_comb begin
    issue    = (state == S_COMPUTE);
    drain_rd = (state == S_WB_RUN) && (drained < nc) &&
               ((32'(fifo_level) + 32'(fifo_push)) < 32'(FIFO_DEPTH));
  end

  assign busy    = (state != S_IDLE);
  assign shift   = job.shift;
  assign a_raddr = A_AW'(r);
  assign b_raddr = B_AW'(jj);
  assign c_re    = issue || drain_rd;
  assign c_raddr = issue ? C_AW'(r * TN + jj) : C_AW'(r * TN + drained);
  assign lanes   = (K_BW + 1)'(kc);

  // DMA stream into Buffer A (bank = k, addr = row) or B (bank = k row, addr = col)
  assign ab_wdata = rd_data;
  assign a_we     = rd_valid && (state == S_LA_WAIT);
  assign a_wbank  = K_BW'(rd_idx);
  assign a_waddr  = A_AW'(r);
  assign b_we     = rd_valid && (state == S_LB_WAIT);
  assign b_wbank  = K_BW'(kk);
  assign b_waddr  = B_AW'(rd_idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      job         <= '0;
      i0          <= '0;
      j0          <= '0;
      k0          <= '0;
      mc          <= '0;
      nc          <= '0;
      kc          <= '0;
      r           <= '0;
      kk          <= '0;
      jj          <= '0;
      drained     <= '0;
      flush_cnt   <= '0;
      err_acc     <= 1'b0;
      done        <= 1'b0;
      err         <= 1'b0;
      rd_start    <= 1'b0;
      rd_addr     <= '0;
      rd_len      <= '0;
      wr_start    <= 1'b0;
      wr_addr     <= '0;
      wr_len      <= '0;
      pe_valid    <= 1'b0;
      pe_first    <= 1'b0;
      pe_tag      <= '0;
      fifo_push   <= 1'b0;
    end else begin
      done      <= 1'b0;
      rd_start  <= 1'b0;
      wr_start  <= 1'b0;
      pe_valid  <= issue;
      pe_first  <= (k0 == 0);
      pe_tag    <= C_AW'(r * TN + jj);
      fifo_push <= drain_rd;
      if (rd_done && rd_err) err_acc <= 1'b1;
      if (wr_done && wr_err) err_acc <= 1'b1;

      unique case (state)
        S_IDLE: if (start) begin
          job     <= cfg;
          i0      <= '0;
          j0      <= '0;
          err_acc <= 1'b0;
          if (cfg.m == 0 || cfg.n == 0) state <= S_DONE;
          else                          state <= S_TILE;
        end
        S_TILE: begin
          mc    <= min32(TM, job.m - i0);
          nc    <= min32(TN, job.n - j0);
          k0    <= '0;
          state <= S_KTILE;
        end
        S_KTILE: begin
          kc    <= (job.k > k0) ? min32(TK, job.k - k0) : '0;
          r     <= '0;
          kk    <= '0;
          state <= (job.k > k0) ? S_LA_ISSUE : S_COMPUTE;
          jj    <= '0;
        end
        // ---- load the A tile, one row of kc bytes per command ----
        S_LA_ISSUE: begin
          rd_start <= 1'b1;
          rd_addr  <= job.a_addr + (i0 + r) * job.k + k0;
          rd_len   <= LEN_W'(kc);
          state    <= S_LA_WAIT;
        end
        S_LA_WAIT: if (rd_done) begin
          if (r + 1 < mc) begin
            r     <= r + 1;
            state <= S_LA_ISSUE;
          end else begin
            state <= S_LB_ISSUE;
          end
        end
        // ---- load the B tile, one row of nc bytes per command ----
        S_LB_ISSUE: begin
          rd_start <= 1'b1;
          rd_addr  <= job.b_addr + (k0 + kk) * job.n + j0;
          rd_len   <= LEN_W'(nc);
          state    <= S_LB_WAIT;
        end
        S_LB_WAIT: if (rd_done) begin
          if (kk + 1 < kc) begin
            kk    <= kk + 1;
            state <= S_LB_ISSUE;
          end else begin
            r     <= '0;
            jj    <= '0;
            state <= S_COMPUTE;
          end
        end
        // ---- one output element per cycle ----
        S_COMPUTE: begin
          if (jj + 1 < nc) begin
            jj <= jj + 1;
          end else begin
            jj <= '0;
            if (r + 1 < mc) r <= r + 1;
            else begin
              flush_cnt <= '0;
              state     <= S_FLUSH;
            end
          end
        end
        // let the last results of the engine reach Buffer C
        S_FLUSH: begin
          flush_cnt <= flush_cnt + 1'b1;
          if (flush_cnt == 2'd2) begin
            if (k0 + TK < job.k) begin
              k0    <= k0 + TK;
              state <= S_KTILE;
            end else begin
              r     <= '0;
              state <= S_WB_ISSUE;
            end
          end
        end
        // ---- write the tile back, one row of nc bytes per command ----
        S_WB_ISSUE: begin
          wr_start    <= 1'b1;
          wr_addr     <= job.c_addr + (i0 + r) * job.n + j0;
          wr_len      <= LEN_W'(nc);
          drained     <= '0;
          state       <= S_WB_RUN;
        end
        S_WB_RUN: begin
          if (drain_rd) drained <= drained + 1;
          if (wr_done) begin
            if (r + 1 < mc) begin
              r     <= r + 1;
              state <= S_WB_ISSUE;
            end else begin
              state <= S_NEXT;
            end
          end
        end
        S_NEXT: begin
          if (j0 + TN < job.n) begin
            j0    <= j0 + TN;
            state <= S_TILE;
          end else if (i0 + TM < job.m) begin
            j0    <= '0;
            i0    <= i0 + TM;
            state <= S_TILE;
          end else begin
            state <= S_DONE;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          err   <= err_acc;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
