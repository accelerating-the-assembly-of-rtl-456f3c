// tb_atom_rearranger: end-to-end run of the whole pipeline at its default
// size (44x44 reservoir, 32 tweezers, 8 samples per clock).
//
// Frame 1: camera mode. A random 50%-filled image is streamed pixel by pixel
//          through the camera model; target is a compact 30x30 block.
// Frame 2: emulation mode, staggered target, no row delay and slow intensity
//          ramps so that the move queue fills and the planner stalls.
// Frame 3: emulation mode with a 20% fill: the examination must abandon it.
//
// Every move reaching the waveform generator is compared, in order, with the
// reference strategy computed here from the same occupancy. At the end of each
// frame `done`/`success` are checked and the DAC outputs must fall silent.
// Mechanisms counted (each must occur at least once): a move started before
// the image was fully read (row pipelining), planner stalls with a full move
// queue, X/Y mode switches, an abandoned attempt, camera and emulation input,
// and activity on both DAC channels.
module tb_atom_rearranger;
  import rearr_pkg::*;
  import tetris_ref_pkg::*;
  localparam int COLS = rearr_pkg::N_COLS;
  localparam int ROWS = rearr_pkg::N_ROWS;
  localparam int K    = rearr_pkg::N_TWEEZ;
  localparam int X0 = 2, Y0 = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dec_cfg_t dcfg;
  dwg_cfg_t wcfg;
  logic [COLS-1:0][ROWS-1:0] target;
  logic start = 0, emu_mode = 0;
  logic [ROWS-1:0][COLS-1:0] emu_frame, cam_frame;
  logic [31:0] emu_cam_delay, emu_row_delay;
  logic fval, lval, dval, cam_busy, cam_start = 0;
  logic [15:0] pix;
  int line_count;
  logic signed [7:0][15:0] dac_x, dac_y;
  logic busy, image_done, move_done, done, success, row_overflow, move_queue_full_seen, trunc_seen;
  logic [31:0] n_stalls;
  logic [15:0] n_row_moves, n_col_moves, n_mode_switches;

  emccd_model #(.COLS(COLS), .ROWS(ROWS), .X0(X0), .Y0(Y0)) u_cam (
    .clk, .start(cam_start), .occ(cam_frame), .fval, .lval, .dval, .pix, .busy(cam_busy), .line_count);

  atom_rearranger u_dut (
    .clk, .rst_n, .dec_cfg(dcfg), .dwg_cfg(wcfg), .target,
    .comp_we(1'b0), .comp_waddr(6'd0), .comp_wdata(16'd0),
    .start, .emu_mode, .emu_frame, .emu_cam_delay, .emu_row_delay,
    .cl_fval(fval), .cl_lval(lval), .cl_dval(dval), .cl_pix(pix),
    .dac_x, .dac_y, .busy, .image_done, .move_done, .done, .success,
    .row_overflow, .move_queue_full_seen, .trunc_seen, .n_stalls,
    .n_row_moves, .n_col_moves, .n_mode_switches);

  // ---- reference moves ----
  typedef struct { int axis; int line; iq_t src; iq_t dst; } mv_t;
  mv_t expq[$];
  int n_moves = 0, n_done = 0, n_image_done = 0;
  int cnt_pipelined = 0, cnt_abandon = 0, cnt_success = 0, cnt_x_active = 0, cnt_y_active = 0;
  bit last_success;

  // moves are observed where they enter the waveform generator
  always @(posedge clk) if (rst_n) begin
    if (u_dut.q_valid && u_dut.q_ready) begin
      mv_t e;
      bit bad;
      n_moves++;
      if (!emu_mode && n_image_done == 0) cnt_pipelined++;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL unexpected move line %0d", u_dut.q_line);
      end else begin
        e = expq.pop_front();
        bad = (int'(u_dut.q_axis) != e.axis) || (int'(u_dut.q_line) != e.line) || (int'(u_dut.q_count) != e.src.size());
        for (int k = 0; k < e.src.size() && !bad; k++)
          if (int'(u_dut.q_src[k]) != e.src[k] || int'(u_dut.q_dst[k]) != e.dst[k]) bad = 1;
        if (bad) begin
          failures++;
          if (failures < 6) $display("FAIL move %0d: axis=%0d line=%0d count=%0d exp axis=%0d line=%0d count=%0d",
                                     n_moves, u_dut.q_axis, u_dut.q_line, u_dut.q_count, e.axis, e.line, e.src.size());
        end
      end
    end
    if (done) begin n_done++; last_success = success; end
    if (image_done) n_image_done++;
    if (dac_x != '0) cnt_x_active++;
    if (dac_y != '0) cnt_y_active++;
  end

  task automatic build_expected(input logic [ROWS-1:0][COLS-1:0] occ, output bit ok);
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
  endtask

  task automatic finish_frame(input bit ok, input int d0, input string name);
    while (n_done == d0) @(negedge clk);
    checks++;
    if (last_success != ok) begin failures++; $display("FAIL %s success=%0d exp %0d", name, last_success, ok); end
    if (ok) cnt_success++; else cnt_abandon++;
    repeat (30) @(negedge clk);
    checks++;
    if (expq.size() != 0 || dac_x != '0 || dac_y != '0 || busy) begin
      failures++; $display("FAIL %s: %0d moves missing, busy=%0d", name, expq.size(), busy);
      expq = {};
    end
    $display("%s: ok=%0d moves so far=%0d stalls=%0d", name, ok, n_moves, n_stalls);
  endtask

  initial begin
    bit ok;
    int d0;
    dcfg.x0 = 12'(X0); dcfg.y0 = 12'(Y0); dcfg.threshold = 24'(9 * 500);
    wcfg = '0;
    wcfg.f0_x = 24'(838861);  wcfg.df_x = 24'(67109);
    wcfg.f0_y = 24'(1006633); wcfg.df_y = 24'(50332);
    wcfg.ramp_step = 16'd8192;
    wcfg.accel = 32'(65536 * 2000);
    wcfg.vmax  = 32'(65536 * 60000);
    wcfg.amp_single = 16'h8000;
    emu_frame = '0; emu_cam_delay = 0; emu_row_delay = 0; cam_frame = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- frame 1: camera ----
    target = '0;
    for (int i = 7; i < 37; i++) for (int r = 7; r < 37; r++) target[i][r] = 1'b1;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) cam_frame[r][c] = ($urandom_range(0, 1) == 1);
    build_expected(cam_frame, ok);
    d0 = n_done;
    @(negedge clk); emu_mode = 0; start = 1; cam_start = 1;
    @(negedge clk); start = 0; cam_start = 0;
    finish_frame(ok, d0, "camera frame");

    // ---- frame 2: emulation, staggered target, slow ramps ----
    target = '0;
    for (int i = 7; i < 37; i++) for (int r = 7; r < 37; r++) target[i][r] = ((i + r) % 2 == 0);
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) emu_frame[r][c] = ($urandom_range(0, 1) == 1);
    wcfg.ramp_step = 16'd1024;
    emu_cam_delay = 200; emu_row_delay = 0;
    build_expected(emu_frame, ok);
    d0 = n_done;
    @(negedge clk); emu_mode = 1; start = 1;
    @(negedge clk); start = 0;
    finish_frame(ok, d0, "emulated frame");

    // ---- frame 3: under-filled, must be abandoned ----
    target = '0;
    for (int i = 7; i < 37; i++) for (int r = 7; r < 37; r++) target[i][r] = 1'b1;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) emu_frame[r][c] = ($urandom_range(0, 4) == 0);
    wcfg.ramp_step = 16'd8192;
    emu_row_delay = 20;
    build_expected(emu_frame, ok);
    d0 = n_done;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    finish_frame(ok, d0, "under-filled frame");

    // ---- mechanisms ----
    $display("pipelined moves=%0d stalls=%0d queue_full=%0d mode switches=%0d abandoned=%0d succeeded=%0d x_active=%0d y_active=%0d images=%0d",
             cnt_pipelined, n_stalls, move_queue_full_seen, n_mode_switches, cnt_abandon, cnt_success,
             cnt_x_active, cnt_y_active, n_image_done);
    checks++; if (cnt_pipelined == 0)       begin failures++; $display("FAIL no move before image end"); end
    checks++; if (n_stalls == 0 || !move_queue_full_seen) begin failures++; $display("FAIL no stall"); end
    checks++; if (n_mode_switches == 0)     begin failures++; $display("FAIL no mode switch"); end
    checks++; if (cnt_abandon == 0)         begin failures++; $display("FAIL no abandoned attempt"); end
    checks++; if (cnt_success == 0)         begin failures++; $display("FAIL no successful attempt"); end
    checks++; if (cnt_x_active == 0 || cnt_y_active == 0) begin failures++; $display("FAIL DAC channel idle"); end
    checks++; if (n_image_done != 1)        begin failures++; $display("FAIL camera frames %0d", n_image_done); end
    checks++; if (row_overflow)             begin failures++; $display("FAIL row overflow"); end
    checks++; if (int'(n_row_moves) + int'(n_col_moves) != n_moves) begin failures++; $display("FAIL move counters"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
