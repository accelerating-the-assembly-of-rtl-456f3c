// tb_dwg: plays row and column moves through the waveform generator.
//  * Single-tweezer moves: within each clock the 8 interleaved samples of a
//    pure tone obey x[j+1] + x[j-1] = 2cos(w) x[j]; this is checked on the
//    multi-tone channel at the source frequency (ramp-up) and the destination
//    frequency (ramp-down), and on the fixed-axis channel at the line
//    frequency, so frequencies, channel routing and the X/Y swap of column
//    moves are all verified from the DAC samples.
//  * A 32-tweezer move: every tweezer must end on its destination frequency.
//  * Move durations against ramp length and an ideal trapezoidal sweep.
//  * Counters of row/column moves and mode switches, silence when idle.
module tb_dwg;
  import rearr_pkg::*;
  localparam int K = rearr_pkg::N_TWEEZ;
  localparam int IW = 6;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dwg_cfg_t cfg;
  logic mv_valid = 0, mv_ready;
  axis_e mv_axis;
  logic [IW-1:0] mv_line;
  logic [$clog2(K+1)-1:0] mv_count;
  logic [K-1:0][IW-1:0] mv_src, mv_dst;
  logic signed [7:0][15:0] x_out, y_out;
  logic busy, move_done;
  logic [15:0] n_row_moves, n_col_moves, n_mode_switches;

  dwg u_dut (.clk, .rst_n, .cfg, .comp_we(1'b0), .comp_waddr(6'd0), .comp_wdata(16'd0),
    .mv_valid, .mv_ready, .mv_axis, .mv_line, .mv_count, .mv_src, .mv_dst,
    .x_out, .y_out, .busy, .move_done, .n_row_moves, .n_col_moves, .n_mode_switches);

  longint cyc = 0;
  always @(negedge clk) cyc++;

  // max |recurrence residual| and peak amplitude of a channel in this clock
  function automatic void tone_err(input logic signed [7:0][15:0] s, input real f_words,
                                   output real err, output real peak);
    real c2;
    c2 = 2.0 * $cos(TWO_PI * f_words / 16777216.0);
    err = 0; peak = 0;
    for (int j = 0; j < 8; j++) begin
      real a;
      a = real'($signed(s[j])); if (a < 0) a = -a;
      if (a > peak) peak = a;
    end
    for (int j = 1; j < 7; j++) begin
      real r;
      r = real'($signed(s[j+1])) + real'($signed(s[j-1])) - c2 * real'($signed(s[j]));
      if (r < 0) r = -r;
      if (r > err) err = r;
    end
  endfunction

  // check a channel for `n` clocks: tone at f, with some minimum amplitude
  task automatic check_tone(input bit use_y, input real f, input int n, input real min_peak, input string what);
    real err, peak, maxpeak, maxerr;
    maxpeak = 0; maxerr = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      tone_err(use_y ? y_out : x_out, f, err, peak);
      if (err > 0.03 * peak + 12.0 && err > maxerr) maxerr = err;
      if (peak > maxpeak) maxpeak = peak;
    end
    checks++;
    if (maxerr > 0 || maxpeak < min_peak) begin
      failures++;
      $display("FAIL %s: residual %f peak %f", what, maxerr, maxpeak);
    end
  endtask

  function automatic real fx(input int i);  return real'(cfg.f0_x) + real'(i) * real'(cfg.df_x); endfunction
  function automatic real fy(input int i);  return real'(cfg.f0_y) + real'(i) * real'(cfg.df_y); endfunction

  task automatic send(input axis_e ax, input int line, input int cnt,
                      input logic [K-1:0][IW-1:0] s, input logic [K-1:0][IW-1:0] d);
    @(negedge clk);
    while (!mv_ready) @(negedge clk);
    mv_valid = 1; mv_axis = ax; mv_line = IW'(line); mv_count = ($clog2(K+1))'(cnt); mv_src = s; mv_dst = d;
    @(negedge clk);
    mv_valid = 0;
  endtask

  int n_done = 0;
  always @(posedge clk) if (rst_n && move_done) n_done++;

  task automatic wait_done(input int prev_n);
    while (n_done == prev_n) @(negedge clk);
  endtask

  initial begin
    logic [K-1:0][IW-1:0] s, d;
    longint t0;
    int nd;
    cfg = '0;
    cfg.f0_x = 24'(838861);  cfg.df_x = 24'(67109);
    cfg.f0_y = 24'(1006633); cfg.df_y = 24'(50332);
    cfg.ramp_step = 16'd2048;
    cfg.accel = 32'(65536 * 50);
    cfg.vmax  = 32'(65536 * 3000);
    cfg.amp_single = 16'h8000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);
    checks++;
    if (x_out != '0 || y_out != '0) begin failures++; $display("FAIL not silent at idle"); end

    // 1: row move, one tweezer, column 3 -> 10 in row 5
    s = '0; d = '0; s[0] = 6'd3; d[0] = 6'd10;
    nd = n_done;
    send(AXIS_ROW, 5, 1, s, d);
    t0 = cyc;
    repeat (14) @(negedge clk);
    check_tone(0, fx(3), 16, 20.0, "row move X at source");
    check_tone(1, fy(5), 16, 8000.0, "row move Y line tone");
    wait_done(nd);
    begin
      real tid, dd, a, v;
      dd = 7.0 * real'(cfg.df_x); a = 50.0; v = 3000.0;
      tid = dd / v + v / a + 67.0;
      checks++;
      if (real'(cyc - t0) < 0.9 * tid || real'(cyc - t0) > 1.15 * tid + 5) begin
        failures++; $display("FAIL move 1 duration %0d ideal %f", cyc - t0, tid);
      end
    end
    // the DAC output lags the sequencer: the tail of the ramp-down is still coming
    check_tone(0, fx(10), 8, 20.0, "row move X at destination");

    // 2: column move, one tweezer, row 20 -> 4 in column 7 (multi-tone now on Y)
    s = '0; d = '0; s[0] = 6'd20; d[0] = 6'd4;
    nd = n_done;
    send(AXIS_COL, 7, 1, s, d);
    repeat (14) @(negedge clk);
    check_tone(1, fy(20), 16, 20.0, "column move Y at source");
    check_tone(0, fx(7), 16, 8000.0, "column move X line tone");
    wait_done(nd);
    check_tone(1, fy(4), 8, 20.0, "column move Y at destination");

    // 3: zero-length move: duration is ramps only
    s = '0; d = '0; s[0] = 6'd9; d[0] = 6'd9;
    nd = n_done;
    send(AXIS_COL, 3, 1, s, d);
    t0 = cyc;
    wait_done(nd);
    checks++;
    if (cyc - t0 < 64 || cyc - t0 > 71) begin failures++; $display("FAIL ramp-only move took %0d", cyc - t0); end

    // 4: 32 tweezers in one row, random in-order destinations
    for (int k = 0; k < K; k++) begin s[k] = IW'(k + 6); d[k] = IW'(k + (k % 3)); end
    nd = n_done;
    send(AXIS_ROW, 11, K, s, d);
    wait_done(nd);
    for (int k = 0; k < K; k++) begin
      checks++;
      if (real'(u_dut.f_cur[k]) != fx(k + (k % 3))) begin
        failures++; $display("FAIL tweezer %0d ended at %0d", k, u_dut.f_cur[k]);
      end
    end
    repeat (30) @(negedge clk);
    checks++;
    if (x_out != '0 || y_out != '0) begin failures++; $display("FAIL not silent after moves"); end
    checks++;
    if (n_row_moves != 2 || n_col_moves != 2 || n_mode_switches != 2 || n_done != 4) begin
      failures++;
      $display("FAIL counters row=%0d col=%0d sw=%0d done=%0d", n_row_moves, n_col_moves, n_mode_switches, n_done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
