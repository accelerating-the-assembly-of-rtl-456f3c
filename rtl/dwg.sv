// dwg: digital waveform generator for the two AOD axes.
//
// Each planned move arrives as a descriptor: the axis (row move = atoms slide
// along X inside one row; column move = atoms slide along Y inside one column),
// the fixed line (the row or column index), and up to K (source, destination)
// site-index pairs. Site indices become tuning words through a linear map
// f = f0 + index * df per axis (cfg). For every move the sequencer runs:
//
//   LOAD      trajectories set to their source frequencies; every DDS gets a
//             fresh pseudo-random initial phase (reduces intermodulation)
//   RAMP_UP   common intensity level rises by cfg.ramp_step per clock to full
//   TRAVEL    all trajectories start together; wait until every active one
//             has arrived (the move lasts as long as its longest displacement)
//   RAMP_DOWN level falls back to zero, atoms are released into static traps
//
// K multi-tone DDS channels (one per mobile tweezer) get their frequency from
// their trajectory and their amplitude from amp_compensation; one addition tree
// per interleaved lane sums them. A single-tone DDS holds the fixed axis at the
// line's frequency while a move is in progress. The multi-tone goes to the X
// channel and the single tone to Y for a row move, and the other way round for
// a column move (mode switch); the routing travels down the pipeline with the
// samples so the switch is sample-exact.
//
// Interface: valid/ready move input (accepted only when idle), per-clock
// LANES x SW-bit samples for the X and Y DAC channels, a host write port for the
// compensation table, busy/move_done status and counters. Latency from the
// TRAVEL state's first frequency change to the DAC ports: 4 + log2(K) clocks.
//
// Following the described system: one DDS per tweezer, 8 interleaved cores,
// rescaling and an addition tree, time-dependent amplitudes with ramps,
// phase-continuous sweeps with bounded acceleration and speed, random initial
// phases, a monochromatic fixed axis. Own choices: the descriptor format, the
// linear index-to-frequency map, the LFSR phase source, output scaling by
// OUT_SHIFT with saturation, and the swap of the multi-tone to the Y channel
// for column moves.
module dwg
  import rearr_pkg::dwg_cfg_t, rearr_pkg::axis_e, rearr_pkg::AXIS_ROW;
#(
  parameter int K         = rearr_pkg::N_TWEEZ,
  parameter int IW        = $clog2(rearr_pkg::N_COLS),
  parameter int LANES     = rearr_pkg::LANES,
  parameter int OUT_SHIFT = (K > 1) ? $clog2(K) : 1,
  localparam int SW = rearr_pkg::SAMPLE_W,
  localparam int PW = rearr_pkg::PHASE_W,
  localparam int AW = rearr_pkg::AMP_W,
  localparam int CW = $clog2(K+1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  dwg_cfg_t                      cfg,
  // compensation table
  input  logic                          comp_we,
  input  logic [5:0]                    comp_waddr,
  input  logic [AW-1:0]                 comp_wdata,
  // move descriptor
  input  logic                          mv_valid,
  output logic                          mv_ready,
  input  axis_e                         mv_axis,
  input  logic [IW-1:0]                 mv_line,
  input  logic [CW-1:0]                 mv_count,
  input  logic [K-1:0][IW-1:0]          mv_src,
  input  logic [K-1:0][IW-1:0]          mv_dst,
  // DAC sample streams
  output logic signed [LANES-1:0][SW-1:0] x_out,
  output logic signed [LANES-1:0][SW-1:0] y_out,
  // status
  output logic                          busy,
  output logic                          move_done,
  output logic [15:0]                   n_row_moves,
  output logic [15:0]                   n_col_moves,
  output logic [15:0]                   n_mode_switches
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_UP, S_TRAVEL, S_DOWN} state_e;
  localparam int LEVELS = (K > 1) ? $clog2(K) : 1;
  localparam int TW = SW + LEVELS;

  state_e              state;
  axis_e               axis_q, last_axis;
  logic                any_move;
  logic [IW-1:0]       line_q;
  logic [K-1:0]        active;
  logic [K-1:0][IW-1:0] src_q, dst_q;
  logic [AW-1:0]       level;
  logic [31:0]         lfsr;
  logic [PW-1:0]       ph_chain [K];
  logic                start_go;

  logic [K-1:0][PW-1:0] f_src, f_dst, f_cur;
  logic [K-1:0]         arrived;
  logic [K-1:0][AW-1:0] amp;
  logic [PW-1:0]        f0_m, df_m, f0_s, df_s, f_single;

  assign mv_ready = (state == S_IDLE);
  assign busy     = (state != S_IDLE);

  // index -> tuning word, multi-tone axis (m) and fixed axis (s)
  always_comb begin
    f0_m = (axis_q == AXIS_ROW) ? cfg.f0_x : cfg.f0_y;
    df_m = (axis_q == AXIS_ROW) ? cfg.df_x : cfg.df_y;
    f0_s = (axis_q == AXIS_ROW) ? cfg.f0_y : cfg.f0_x;
    df_s = (axis_q == AXIS_ROW) ? cfg.df_y : cfg.df_x;
    for (int k = 0; k < K; k++) begin
      f_src[k] = f0_m + PW'(src_q[k]) * df_m;
      f_dst[k] = f0_m + PW'(dst_q[k]) * df_m;
    end
    f_single = f0_s + PW'(line_q) * df_s;
  end

  // move sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; axis_q <= AXIS_ROW; last_axis <= AXIS_ROW; any_move <= 1'b0;
      line_q <= '0; active <= '0; src_q <= '0; dst_q <= '0; level <= '0;
      start_go <= 1'b0; move_done <= 1'b0;
      n_row_moves <= '0; n_col_moves <= '0; n_mode_switches <= '0;
    end else begin
      start_go  <= 1'b0;
      move_done <= 1'b0;
      case (state)
        S_IDLE: if (mv_valid) begin
          axis_q <= mv_axis;
          line_q <= mv_line;
          src_q  <= mv_src;
          dst_q  <= mv_dst;
          for (int k = 0; k < K; k++) active[k] <= (CW'(k) < mv_count);
          if (mv_axis == AXIS_ROW) n_row_moves <= n_row_moves + 1'b1;
          else                     n_col_moves <= n_col_moves + 1'b1;
          if (any_move && mv_axis != last_axis) n_mode_switches <= n_mode_switches + 1'b1;
          last_axis <= mv_axis;
          any_move  <= 1'b1;
          level     <= '0;
          state     <= S_LOAD;
        end
        S_LOAD: state <= S_UP;
        S_UP: begin
          if ({1'b0, level} + {1'b0, cfg.ramp_step} >= {1'b0, {AW{1'b1}}} || cfg.ramp_step == '0) begin
            level    <= '1;
            start_go <= 1'b1;
            state    <= S_TRAVEL;
          end else level <= level + cfg.ramp_step;
        end
        S_TRAVEL: if (!start_go && ((arrived | ~active) == '1)) state <= S_DOWN;
        S_DOWN: begin
          if (level <= cfg.ramp_step || cfg.ramp_step == '0) begin
            level     <= '0;
            move_done <= 1'b1;
            active    <= '0;
            state     <= S_IDLE;
          end else level <= level - cfg.ramp_step;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // pseudo-random initial phases: a 32-bit LFSR feeding a K-deep delay chain
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= 32'hACE1_2468;
      for (int k = 0; k < K; k++) ph_chain[k] <= '0;
    end else begin
      lfsr <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
      ph_chain[0] <= lfsr[PW-1:0];
      for (int k = 1; k < K; k++) ph_chain[k] <= ph_chain[k-1];
    end
  end

  amp_compensation #(.K(K)) u_amp (
    .clk, .rst_n, .freq(f_cur), .active, .level,
    .we(comp_we), .waddr(comp_waddr), .wdata(comp_wdata), .amp
  );

  logic signed [LANES-1:0][SW-1:0] tone [K];
  logic signed [LANES-1:0][SW-1:0] single;

  for (genvar k = 0; k < K; k++) begin : g_tw
    tweezer_trajectory u_traj (
      .clk, .rst_n, .load(state == S_LOAD), .f_src(f_src[k]), .f_dst(f_dst[k]),
      .go(start_go), .accel(cfg.accel), .vmax(cfg.vmax), .freq(f_cur[k]), .arrived(arrived[k])
    );
    dds #(.LANES(LANES)) u_dds (
      .clk, .rst_n, .load_phase(state == S_LOAD), .phase0(ph_chain[k]),
      .freq(f_cur[k]), .amp(amp[k]), .samples(tone[k])
    );
  end

  dds #(.LANES(LANES)) u_single (
    .clk, .rst_n, .load_phase(1'b0), .phase0('0), .freq(f_single),
    .amp((state == S_IDLE) ? '0 : cfg.amp_single), .samples(single)
  );

  // one addition tree per lane
  logic signed [TW-1:0] lane_sum [LANES];
  for (genvar j = 0; j < LANES; j++) begin : g_lane
    logic signed [K-1:0][SW-1:0] col;
    always_comb for (int k = 0; k < K; k++) col[k] = tone[k][j];
    addition_tree #(.N(K), .W(SW)) u_tree (.clk, .rst_n, .in(col), .sum(lane_sum[j]));
  end

  // align the single tone and the axis with the tree latency (+1 for amp reg)
  logic signed [LANES-1:0][SW-1:0] single_d [LEVELS];
  axis_e                           axis_d   [LEVELS+4];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LEVELS; i++) single_d[i] <= '0;
      for (int i = 0; i < LEVELS + 4; i++) axis_d[i] <= AXIS_ROW;
    end else begin
      single_d[0] <= single;
      for (int i = 1; i < LEVELS; i++) single_d[i] <= single_d[i-1];
      axis_d[0] <= axis_q;
      for (int i = 1; i < LEVELS + 4; i++) axis_d[i] <= axis_d[i-1];
    end
  end

  // scale, saturate and route
  logic signed [LANES-1:0][SW-1:0] multi;
  always_comb begin
    for (int j = 0; j < LANES; j++) begin
      logic signed [TW-1:0] s;
      s = lane_sum[j] >>> OUT_SHIFT;
      if (s > TW'(2**(SW-1) - 1))       multi[j] = SW'(2**(SW-1) - 1);
      else if (s < -TW'(2**(SW-1)))     multi[j] = SW'(-(2**(SW-1)));
      else                              multi[j] = SW'(s);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_out <= '0; y_out <= '0;
    end else if (axis_d[LEVELS+3] == AXIS_ROW) begin
      x_out <= multi;
      y_out <= single_d[LEVELS-1];
    end else begin
      x_out <= single_d[LEVELS-1];
      y_out <= multi;
    end
  end

  a_no_accept_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (state != S_IDLE) |-> !mv_ready);
  a_count_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (mv_valid && mv_ready) |-> (mv_count <= CW'(K)));
endmodule
