// tb_gemm_controller -- checks the tile sequencer on its own. The DMA
// engines and the output FIFO are emulated here; the expected order of DMA
// commands (address, length) is built independently from the loop nest
// "row tile, column tile, k tile: A rows, B rows, compute; then C rows".
// Also checked: buffer write bank/address of every DMA byte, one engine
// issue per clock with the right tag, first flag and lane count, the FIFO
// never overfilled, and the number of drained bytes per row.
module tb_gemm_controller;
  import gemm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  gemm_cfg_t cfg;
  logic start, busy, done, err;
  shift_t shift;
  logic rd_start, rd_done, rd_err, rd_valid;
  logic [31:0] rd_addr, wr_addr;
  logic [15:0] rd_len, rd_idx, wr_len;
  logic [7:0]  rd_data, ab_wdata;
  logic a_we, b_we, c_re, pe_valid, pe_first, fifo_push, wr_start, wr_done, wr_err;
  logic [3:0] a_wbank, b_wbank, lanes;
  logic [2:0] a_waddr, a_raddr;
  logic [7:0] b_waddr, b_raddr;
  logic [10:0] c_raddr, pe_tag;
  logic [2:0] fifo_level;

  gemm_controller dut (.clk, .rst_n, .cfg, .start, .busy, .done, .err, .shift,
    .rd_start, .rd_addr, .rd_len, .rd_done, .rd_err, .rd_valid, .rd_data, .rd_idx,
    .a_we, .a_wbank, .a_waddr, .b_we, .b_wbank, .b_waddr, .ab_wdata,
    .a_raddr, .b_raddr, .c_re, .c_raddr, .pe_valid, .pe_first, .pe_tag, .lanes,
    .fifo_push, .fifo_level, .wr_start, .wr_addr, .wr_len, .wr_done, .wr_err);

  typedef struct { bit is_a; int addr; int len; int row; } rcmd_t;
  typedef struct { int addr; int len; } wcmd_t;
  typedef struct { int rows; int cols; int kc; bit first; } ctile_t;
  rcmd_t  exp_r[$];
  wcmd_t  exp_w[$];
  ctile_t exp_c[$];

  function automatic int imin(int x, int y); return x < y ? x : y; endfunction

  task automatic build_expect(gemm_cfg_t c);
    int M = int'(c.m), K = int'(c.k), N = int'(c.n);
    for (int i0 = 0; i0 < M; i0 += 8)
      for (int j0 = 0; j0 < N; j0 += 224) begin
        int mc = imin(8, M - i0), nc = imin(224, N - j0);
        int k0 = 0;
        do begin
          int kc = (K > k0) ? imin(9, K - k0) : 0;
          if (kc > 0) begin
            for (int r = 0; r < mc; r++) exp_r.push_back('{1, int'(c.a_addr) + (i0 + r) * K + k0, kc, r});
            for (int k = 0; k < kc; k++) exp_r.push_back('{0, int'(c.b_addr) + (k0 + k) * N + j0, nc, k});
          end
          exp_c.push_back('{mc, nc, kc, k0 == 0});
          k0 += 9;
        end while (k0 < K);
        for (int r = 0; r < mc; r++) exp_w.push_back('{int'(c.c_addr) + (i0 + r) * N + j0, nc});
      end
  endtask

  // ---- read DMA emulation ----
  rcmd_t cur_r;
  int    r_left = 0, r_idx = 0, r_gap = 0;
  always @(posedge clk) begin
    rd_valid <= 1'b0; rd_done <= 1'b0;
    if (rst_n && rd_start) begin
      checks++;
      if (exp_r.size() == 0) begin failures++; $display("FAIL unexpected read command"); end
      else begin
        cur_r = exp_r.pop_front();
        if (int'(rd_addr) != cur_r.addr || int'(rd_len) != cur_r.len) begin
          failures++;
          if (failures < 10) $display("FAIL read cmd %h/%0d exp %h/%0d", rd_addr, rd_len, cur_r.addr, cur_r.len);
        end
      end
      r_left <= int'(rd_len); r_idx <= 0; r_gap <= 3;
    end else if (r_gap > 0) r_gap <= r_gap - 1;
    else if (r_left > 0 && $urandom_range(3) != 0) begin
      rd_valid <= 1'b1; rd_idx <= 16'(r_idx); rd_data <= 8'($urandom);
      r_idx <= r_idx + 1; r_left <= r_left - 1;
      if (r_left == 1) rd_done <= 1'b1;
    end
  end
  // buffer writes of the DMA bytes
  always @(posedge clk) if (rst_n && (a_we || b_we)) begin
    checks++;
    if (a_we == b_we || a_we != cur_r.is_a) begin failures++; $display("FAIL wrong buffer written"); end
    else if (a_we && (int'(a_wbank) != int'(rd_idx) || int'(a_waddr) != cur_r.row)) begin
      failures++; $display("FAIL A write bank %0d addr %0d", a_wbank, a_waddr);
    end else if (b_we && (int'(b_wbank) != cur_r.row || int'(b_waddr) != int'(rd_idx))) begin
      failures++; $display("FAIL B write bank %0d addr %0d", b_wbank, b_waddr);
    end
    if (ab_wdata != rd_data) begin failures++; $display("FAIL write data"); end
  end

  // ---- compute phase check ----
  ctile_t cur_c;
  int c_cnt = 0, c_gap_err = 0;
  bit in_c = 0;
  always @(posedge clk) if (rst_n) begin
    if (pe_valid) begin
      if (!in_c) begin
        in_c = 1; c_cnt = 0;
        if (exp_c.size() == 0) begin failures++; $display("FAIL unexpected compute"); end
        else cur_c = exp_c.pop_front();
      end
      if (int'(pe_tag) != (c_cnt / cur_c.cols) * 224 + (c_cnt % cur_c.cols) ||
          pe_first != cur_c.first || int'(lanes) != cur_c.kc) begin
        failures++;
        if (failures < 10) $display("FAIL issue %0d tag %0d first %0b lanes %0d", c_cnt, pe_tag, pe_first, lanes);
      end
      c_cnt++;
    end else if (in_c) begin
      in_c = 0;
      checks++;
      if (c_cnt != cur_c.rows * cur_c.cols) begin
        failures++; $display("FAIL compute phase had %0d issues, exp %0d (gap or miscount)", c_cnt, cur_c.rows * cur_c.cols);
      end
    end
  end

  // ---- write DMA + FIFO emulation ----
  wcmd_t cur_w;
  int lvl = 0, w_got = 0, w_popped = 0, w_active = 0;
  assign fifo_level = 3'(lvl);
  always @(posedge clk) begin
    int pop;
    wr_done <= 1'b0;
    pop = (lvl > 0 && w_active && $urandom_range(2) != 0) ? 1 : 0;
    if (rst_n && wr_start) begin
      checks++;
      if (exp_w.size() == 0) begin failures++; $display("FAIL unexpected write command"); end
      else begin
        cur_w = exp_w.pop_front();
        if (int'(wr_addr) != cur_w.addr || int'(wr_len) != cur_w.len) begin
          failures++; $display("FAIL write cmd %h/%0d exp %h/%0d", wr_addr, wr_len, cur_w.addr, cur_w.len);
        end
      end
      w_active = 1; w_got = 0; w_popped = 0;
    end
    if (rst_n && fifo_push) w_got++;
    w_popped += pop;
    lvl = lvl + (rst_n && fifo_push ? 1 : 0) - pop;
    if (lvl > 4) begin failures++; $display("FAIL FIFO overfilled"); end
    if (w_active && w_popped == cur_w.len) begin
      w_active = 0;
      wr_done <= 1'b1;
      checks++;
      if (w_got != cur_w.len) begin failures++; $display("FAIL drained %0d bytes exp %0d", w_got, cur_w.len); end
    end
  end

  task automatic run_job(int M, int K, int N);
    cfg = '{a_addr: 32'h1000, b_addr: 32'h20000, c_addr: 32'h80000, m: 32'(M), k: 32'(K), n: 32'(N), shift: -6'sd2};
    build_expect(cfg);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (exp_r.size() || exp_w.size() || exp_c.size() || err || shift != -6'sd2) begin
      failures++; $display("FAIL job %0dx%0dx%0d left r=%0d w=%0d c=%0d", M, K, N, exp_r.size(), exp_w.size(), exp_c.size());
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; rd_err = 0; wr_err = 0; rd_valid = 0; rd_done = 0; wr_done = 0; cfg = '0;
    rd_idx = 0; rd_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run_job(1, 1, 1);
    run_job(8, 9, 224);
    run_job(19, 20, 500);
    run_job(3, 0, 5);         // K = 0: result is all zero, no loads
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
