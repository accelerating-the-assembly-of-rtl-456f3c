// tb_tetris_planner: drives random 50%-filled 44x44 frames (30x30 compact
// target in the middle, plus a staggered target) through the planner with a
// randomly stalling move consumer, and compares every issued move (axis, line,
// pairs) with the reference strategy. Also checks an under-filled frame is
// abandoned after the examination with no column moves, and that stalls occur.
module tb_tetris_planner;
  import tetris_ref_pkg::*;
  import rearr_pkg::*;
  localparam int COLS = rearr_pkg::N_COLS;
  localparam int ROWS = rearr_pkg::N_ROWS;
  localparam int K    = rearr_pkg::N_TWEEZ;
  localparam int IW   = $clog2(COLS);
  localparam int CW   = $clog2(K+1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0;
  logic [COLS-1:0][ROWS-1:0] target;
  logic row_valid = 0, row_ready;
  logic [$clog2(ROWS)-1:0] row_idx;
  logic [COLS-1:0] row_occ;
  logic mv_valid, mv_ready = 0;
  axis_e mv_axis;
  logic [IW-1:0] mv_line;
  logic [CW-1:0] mv_count;
  logic [K-1:0][IW-1:0] mv_src, mv_dst;
  logic busy, done, success, trunc_seen;
  logic [31:0] n_stalls;

  tetris_planner u_dut (.clk, .rst_n, .start, .target, .row_valid, .row_ready, .row_idx, .row_occ,
    .mv_valid, .mv_ready, .mv_axis, .mv_line, .mv_count, .mv_src, .mv_dst,
    .busy, .done, .success, .trunc_seen, .n_stalls);

  // expected moves
  typedef struct { int axis; int line; iq_t src; iq_t dst; } mv_t;
  mv_t expq[$];
  int n_moves_seen, n_abandon, n_success;
  int n_done;
  always @(posedge clk) if (rst_n && done) n_done++;

  always @(posedge clk) begin
    mv_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && mv_valid && mv_ready) begin
      mv_t e;
      n_moves_seen++;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL unexpected move line %0d", mv_line);
      end else begin
        bit bad;
        e = expq.pop_front();
        bad = (int'(mv_axis) != e.axis) || (int'(mv_line) != e.line) || (int'(mv_count) != e.src.size());
        for (int k = 0; k < e.src.size() && !bad; k++)
          if (int'(mv_src[k]) != e.src[k] || int'(mv_dst[k]) != e.dst[k]) bad = 1;
        if (bad) begin
          failures++;
          if (failures < 6) $display("FAIL move axis=%0d line=%0d count=%0d exp axis=%0d line=%0d count=%0d",
                                     mv_axis, mv_line, mv_count, e.axis, e.line, e.src.size());
        end
      end
    end
  end

  task automatic run_frame(input logic [ROWS-1:0][COLS-1:0] occ, output bit ok);
    iq_t R[], A[], T[];
    R = new[COLS]; A = new[COLS]; T = new[COLS];
    for (int i = 0; i < COLS; i++) for (int r = 0; r < ROWS; r++)
      if (target[i][r]) begin R[i].push_back(r); T[i].push_back(r); end
    for (int r = 0; r < ROWS; r++) begin
      iq_t oc, s, d;
      for (int c = 0; c < COLS; c++) if (occ[r][c]) oc.push_back(c);
      plan_row(R, A, r, oc, K, s, d);
      if (s.size() > 0) expq.push_back('{0, r, s, d});
    end
    ok = 1;
    for (int i = 0; i < COLS; i++) if (R[i].size() != 0) ok = 0;
    if (ok) for (int i = 0; i < COLS; i++) begin
      iq_t s, d;
      plan_col(A[i], T[i], s, d);
      if (s.size() > 0) expq.push_back('{1, i, s, d});
    end
    begin int d0; d0 = n_done;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      row_valid = 1; row_idx = r[$clog2(ROWS)-1:0]; row_occ = occ[r];
      while (!row_ready) @(negedge clk);
      @(negedge clk);
      row_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    while (n_done == d0) @(negedge clk);
    end
    checks++;
    if (success != ok) begin failures++; $display("FAIL success=%0d exp %0d", success, ok); end
    if (ok) n_success++; else n_abandon++;
    repeat (5) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d moves missing", expq.size()); expq = {}; end
  endtask

  initial begin
    logic [ROWS-1:0][COLS-1:0] occ;
    bit ok;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 8; f++) begin
      target = '0;
      for (int i = 7; i < 37; i++) for (int r = 7; r < 37; r++)
        target[i][r] = (f % 4 == 3) ? ((i + r) % 2 == 0) : 1'b1;   // compact or staggered
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++)
        occ[r][c] = (f == 2) ? ($urandom_range(0, 4) == 0) : ($urandom_range(0, 1) == 1);
      run_frame(occ, ok);
      $display("frame %0d ok=%0d moves=%0d", f, ok, n_moves_seen);
    end
    checks++;
    if (n_abandon == 0 || n_success == 0 || n_stalls == 0) begin
      failures++; $display("FAIL coverage abandon=%0d success=%0d stalls=%0d", n_abandon, n_success, n_stalls);
    end
    $display("moves=%0d success=%0d abandoned=%0d stalls=%0d", n_moves_seen, n_success, n_abandon, n_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired state=%0d row_ready=%0d mv_valid=%0d expq=%0d", u_dut.state, row_ready, mv_valid, expq.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
