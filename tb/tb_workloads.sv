// tb_workloads: hardware-in-the-loop runs of the full-size pipeline with the
// timing of the original system, for the target geometries it was evaluated
// on (compact L x L squares and a staggered pattern) in the 44x44 reservoir.
//
// Each frame is a random 50%-filled loading pattern of an S x S reservoir
// (S = ceil(sqrt(2) L + 1) for an L x L compact target, L + 1 for a staggered
// one), fed through the emulation path. The emulator waits the camera latency (835 us = 128256 clocks at
// 153.6 MHz) once, then the decoding time of one site row (3 pixel rows of
// 37.1 us = 17096 clocks) before each row. The waveform generator transfers
// atoms between static and mobile traps in ~35 us (intensity ramp of 5462
// clocks) and moves them 30 us per site. The tones sit in the 90-110 MHz band,
// 44 sites across 20 MHz.
//
// Checks per frame:
//  * every move against the reference strategy computed here;
//  * success, and silence of both DAC channels afterwards;
//  * the first move cannot start before camera latency plus one row, and
//    starts within a few clocks of its row being decoded (start-up overhead);
//  * every move's duration against two ramps plus an ideal trapezoidal sweep
//    over its longest displacement;
//  * the total time covers all moves, and is shorter than doing read-out
//    and moves one after the other (the stages overlap).
// The total time of each frame is printed in microseconds. The emulator
// still steps through all 44 rows, so small reservoirs pay the read-out time
// of the empty rows below them.
module tb_workloads;
  import rearr_pkg::*;
  import tetris_ref_pkg::*;
  localparam int COLS = rearr_pkg::N_COLS;
  localparam int ROWS = rearr_pkg::N_ROWS;
  localparam int K    = rearr_pkg::N_TWEEZ;
  localparam int CAM_DELAY = 128256;       // 835 us
  localparam int ROW_DELAY = 17096;        // 3 x 37.1 us
  localparam int RAMP_STEP = 12;           // 65535/12 clocks ~ 35 us
  localparam int DF        = 6206;         // 20 MHz / 44 sites in 73.24 Hz units
  localparam int F0        = 1228800;      // 90 MHz
  localparam real SITE_CLK = 4608.0;       // 30 us per site
  localparam real VMAX     = DF / SITE_CLK; // tuning-word units per clock
  localparam real T_ACC    = 460.0;        // clocks to reach vmax

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  dec_cfg_t dcfg;
  dwg_cfg_t wcfg;
  logic [COLS-1:0][ROWS-1:0] target;
  logic start = 0;
  logic [ROWS-1:0][COLS-1:0] emu_frame;
  logic signed [7:0][15:0] dac_x, dac_y;
  logic busy, image_done, move_done, done, success, row_overflow, move_queue_full_seen, trunc_seen;
  logic [31:0] n_stalls;
  logic [15:0] n_row_moves, n_col_moves, n_mode_switches;

  atom_rearranger u_dut (
    .clk, .rst_n, .dec_cfg(dcfg), .dwg_cfg(wcfg), .target,
    .comp_we(1'b0), .comp_waddr(6'd0), .comp_wdata(16'd0),
    .start, .emu_mode(1'b1), .emu_frame, .emu_cam_delay(32'(CAM_DELAY)), .emu_row_delay(32'(ROW_DELAY)),
    .cl_fval(1'b0), .cl_lval(1'b0), .cl_dval(1'b0), .cl_pix(16'd0),
    .dac_x, .dac_y, .busy, .image_done, .move_done, .done, .success,
    .row_overflow, .move_queue_full_seen, .trunc_seen, .n_stalls,
    .n_row_moves, .n_col_moves, .n_mode_switches);

  typedef struct { int axis; int line; iq_t src; iq_t dst; } mv_t;
  mv_t expq[$];
  int n_done = 0, n_moves = 0;
  bit last_success;
  longint t_first, t_accept, sum_dur;
  real exp_dur;

  function automatic real ideal_duration(int dmax);
    real ramp = $ceil(65535.0 / RAMP_STEP);
    real span = real'(dmax) * DF;
    real a = VMAX / T_ACC;
    real travel;
    if (dmax == 0) travel = 0.0;
    else if (span >= VMAX * VMAX / a) travel = span / VMAX + VMAX / a;
    else travel = 2.0 * $sqrt(span / a);
    return 2.0 * ramp + travel;
  endfunction

  always @(posedge clk) if (rst_n) begin
    // the previous move may end in the same clock the next one is accepted
    if (move_done) begin
      real d;
      d = real'(cyc - t_accept);
      sum_dur += cyc - t_accept;
      checks++;
      if (d < 0.95 * exp_dur || d > 1.05 * exp_dur + 20.0) begin
        failures++; $display("FAIL move %0d took %0d clocks, ideal %0.1f", n_moves, cyc - t_accept, exp_dur);
      end
    end
    if (u_dut.q_valid && u_dut.q_ready) begin
      mv_t e;
      bit bad;
      int dmax;
      n_moves++;
      if (t_first < 0) t_first = cyc;
      t_accept = cyc;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL unexpected move line %0d", u_dut.q_line);
        exp_dur = 0.0;
      end else begin
        e = expq.pop_front();
        bad = (int'(u_dut.q_axis) != e.axis) || (int'(u_dut.q_line) != e.line) || (int'(u_dut.q_count) != e.src.size());
        dmax = 0;
        for (int k = 0; k < e.src.size(); k++) begin
          if (int'(u_dut.q_src[k]) != e.src[k] || int'(u_dut.q_dst[k]) != e.dst[k]) bad = 1;
          if (e.src[k] - e.dst[k] > dmax) dmax = e.src[k] - e.dst[k];
          if (e.dst[k] - e.src[k] > dmax) dmax = e.dst[k] - e.src[k];
        end
        exp_dur = ideal_duration(dmax);
        if (bad) begin
          failures++;
          if (failures < 6) $display("FAIL move %0d: axis=%0d line=%0d count=%0d", n_moves, u_dut.q_axis, u_dut.q_line, u_dut.q_count);
        end
      end
    end
    if (done) begin n_done++; last_success = success; end
  end

  task automatic build_expected(input logic [ROWS-1:0][COLS-1:0] occ, output bit ok, output int first_row);
    iq_t R[], A[], T[];
    R = new[COLS]; A = new[COLS]; T = new[COLS];
    first_row = -1;
    for (int i = 0; i < COLS; i++) for (int r = 0; r < ROWS; r++)
      if (target[i][r]) begin R[i].push_back(r); T[i].push_back(r); end
    for (int r = 0; r < ROWS; r++) begin
      iq_t oc, s, d;
      for (int c = 0; c < COLS; c++) if (occ[r][c]) oc.push_back(c);
      plan_row(R, A, r, oc, K, s, d);
      if (s.size() > 0) begin
        expq.push_back('{0, r, s, d});
        if (first_row < 0) first_row = r;
      end
    end
    ok = 1;
    for (int i = 0; i < COLS; i++) if (R[i].size() != 0) ok = 0;
    if (ok) for (int i = 0; i < COLS; i++) begin
      iq_t s, d;
      plan_col(A[i], T[i], s, d);
      if (s.size() > 0) expq.push_back('{1, i, s, d});
    end
  endtask

  // staggered = 0: compact L x L block; 1: checkerboard inside an L x L block.
  // Atoms are loaded only in the top-left S x S sites (the reservoir used for
  // this target size); the target is centred in it.
  task automatic run_frame(input int L, input int S, input bit staggered);
    bit ok;
    int first_row, d0, n_atoms, m0;
    longint t_start, t_total, s0, seq;
    int lo = (S - L) / 2;
    target = '0;
    n_atoms = 0;
    for (int i = lo; i < lo + L; i++) for (int r = lo; r < lo + L; r++)
      if (!staggered || ((i + r) % 2 == 0)) begin target[i][r] = 1'b1; n_atoms++; end
    // keep drawing until the loading can fill the target (a failed attempt would be repeated in the lab)
    do begin
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) emu_frame[r][c] = (r < S) && (c < S) && ($urandom_range(0, 1) == 1);
      expq = {};
      build_expected(emu_frame, ok, first_row);
    end while (!ok);
    d0 = n_done; m0 = n_moves; s0 = sum_dur; t_first = -1;
    @(negedge clk); start = 1; t_start = cyc + 1;
    @(negedge clk); start = 0;
    while (n_done == d0) @(negedge clk);
    t_total = cyc - t_start;
    checks++;
    if (!last_success) begin failures++; $display("FAIL L=%0d not successful", L); end
    repeat (30) @(negedge clk);
    checks++;
    if (expq.size() != 0 || dac_x != '0 || dac_y != '0 || busy) begin
      failures++; $display("FAIL L=%0d: %0d moves missing", L, expq.size()); expq = {};
    end
    // start-up overhead: camera latency plus decoding of the first row that moves
    checks++;
    if (t_first - t_start < CAM_DELAY + ROW_DELAY ||
        t_first - t_start > CAM_DELAY + longint'(first_row + 1) * ROW_DELAY + 8) begin
      failures++; $display("FAIL L=%0d first move after %0d clocks", L, t_first - t_start);
    end
    seq = CAM_DELAY + longint'(ROWS) * ROW_DELAY + (sum_dur - s0);
    checks++;
    if (t_total < sum_dur - s0 || t_total >= seq) begin
      failures++; $display("FAIL L=%0d total %0d clocks, moves %0d, sequential %0d", L, t_total, sum_dur - s0, seq);
    end
    $display("%s L=%0d N=%0d reservoir %0dx%0d: %0d moves, start-up %0.1f us, moving %0.1f us, total %0.1f us (read-out then moves: %0.1f us)",
             staggered ? "staggered" : "compact", L, n_atoms, S, S, n_moves - m0,
             real'(t_first - t_start) / 153.6, real'(sum_dur - s0) / 153.6,
             real'(t_total) / 153.6, real'(seq) / 153.6);
  endtask

  initial begin
    dcfg = '0;
    wcfg = '0;
    wcfg.f0_x = 24'(F0); wcfg.df_x = 24'(DF);
    wcfg.f0_y = 24'(F0); wcfg.df_y = 24'(DF);
    wcfg.ramp_step = 16'(RAMP_STEP);
    wcfg.vmax  = 32'($rtoi(VMAX * 65536.0));
    wcfg.accel = 32'($rtoi(VMAX / T_ACC * 65536.0));
    wcfg.amp_single = 16'h8000;
    emu_frame = '0; target = '0;
    sum_dur = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reservoir sides: ceil(sqrt(2) L + 1) for compact targets, L + 1 for staggered ones
    run_frame(10, 16, 0);
    run_frame(20, 30, 0);
    run_frame(30, 44, 0);
    run_frame(30, 31, 1);
    run_frame(43, 44, 1);
    checks++;
    if (row_overflow || trunc_seen) begin failures++; $display("FAIL overflow or truncation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
