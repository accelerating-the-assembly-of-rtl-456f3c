// atom_rearranger: integrated measurement-and-feedback pipeline that assembles
// a defect-free atom array from a stochastically loaded tweezer array.
//
// Data path (all stages run concurrently, so atoms of row k are already moving
// while row k+1 is still being read out of the camera):
//
//   camera pixels -> image_decoder --+
//                                    +-> row FIFO -> tetris_planner -> move FIFO -> dwg -> DAC X/Y
//   host frame    -> row_emulator ---+   (occupancy  (strategy:          (planned    (multi-tone
//                    (emu_mode)           rows)       row moves,          moves)      waveforms)
//                                                     examination,
//                                                     column moves)
//
// `start` begins one frame: the planner copies the target geometry and, in
// emulation mode, the emulator starts replaying `emu_frame` with the camera and
// per-row decoder delays. In camera mode the decoder delivers rows as the
// camera streams them. The row FIFO holds ROW_FIFO_DEPTH rows (at least a whole
// frame) because the camera cannot be paused; row_overflow flags a lost row.
// The move FIFO decouples planning from the slower atom motion; when it is full
// the planner stalls and rows wait in the row FIFO.
//
// image_done pulses at the end of each camera frame, move_done after each
// executed move. `done` pulses when the planner has finished (or abandoned) the frame and the
// last planned move has left the waveform generator; `success` then tells
// whether the examination step passed.
//
// Interface: parallel Camera Link pixel bus (deserialised elsewhere), the
// target geometry as COLS masks of ROWS bits, run-time configuration structs,
// a compensation-table write port, and LANES samples per clock for each DAC
// channel. Everything is in one clock domain (153.6 MHz for 1.2288 GS/s).
//
// Following the described system: the decoder / strategy maker / waveform
// generator split, row-by-row pipelining, emulation of camera timing for
// hardware-in-the-loop runs. Own choices: the Tetris strategy is dedicated logic
// rather than software on a soft-core processor, the FIFOs between stages and
// their depths, the single clock domain.
module atom_rearranger
  import rearr_pkg::dwg_cfg_t, rearr_pkg::dec_cfg_t, rearr_pkg::axis_e;
#(
  parameter int COLS           = rearr_pkg::N_COLS,
  parameter int ROWS           = rearr_pkg::N_ROWS,
  parameter int K              = rearr_pkg::N_TWEEZ,
  parameter int ROW_FIFO_DEPTH = 64,
  parameter int MOVE_FIFO_DEPTH = 4,
  localparam int LANES = rearr_pkg::LANES,
  localparam int SW    = rearr_pkg::SAMPLE_W,
  localparam int PWD   = rearr_pkg::PIX_W,
  localparam int AW    = rearr_pkg::AMP_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host configuration
  input  dec_cfg_t                  dec_cfg,
  input  dwg_cfg_t                  dwg_cfg,
  input  logic [COLS-1:0][ROWS-1:0] target,
  input  logic                      comp_we,
  input  logic [5:0]                comp_waddr,
  input  logic [AW-1:0]             comp_wdata,
  // frame control
  input  logic                      start,
  input  logic                      emu_mode,
  input  logic [ROWS-1:0][COLS-1:0] emu_frame,
  input  logic [31:0]               emu_cam_delay,
  input  logic [31:0]               emu_row_delay,
  // camera (Camera Link, deserialised)
  input  logic                      cl_fval,
  input  logic                      cl_lval,
  input  logic                      cl_dval,
  input  logic [PWD-1:0]            cl_pix,
  // DAC sample streams, LANES samples per clock
  output logic signed [LANES-1:0][SW-1:0] dac_x,
  output logic signed [LANES-1:0][SW-1:0] dac_y,
  // status
  output logic                      busy,
  output logic                      image_done,
  output logic                      move_done,
  output logic                      done,
  output logic                      success,
  output logic                      row_overflow,
  output logic                      move_queue_full_seen,
  output logic                      trunc_seen,
  output logic [31:0]               n_stalls,
  output logic [15:0]               n_row_moves,
  output logic [15:0]               n_col_moves,
  output logic [15:0]               n_mode_switches
);
  localparam int RIW = $clog2(ROWS);
  localparam int IW  = $clog2((COLS > ROWS) ? COLS : ROWS);
  localparam int CW  = $clog2(K+1);
  localparam int RFW = RIW + COLS;
  localparam int MFW = 1 + IW + CW + 2 * K * IW;

  // ---- row sources ----
  logic               dec_valid, emu_valid, emu_busy;
  logic [RIW-1:0]     dec_idx, emu_idx;
  logic [COLS-1:0]    dec_occ, emu_occ;

  image_decoder #(.COLS(COLS), .ROWS(ROWS)) u_dec (
    .clk, .rst_n, .cfg(dec_cfg), .fval(cl_fval), .lval(cl_lval), .dval(cl_dval), .pix(cl_pix),
    .row_valid(dec_valid), .row_idx(dec_idx), .row_occ(dec_occ), .frame_done(image_done));

  row_emulator #(.COLS(COLS), .ROWS(ROWS)) u_emu (
    .clk, .rst_n, .start(start && emu_mode), .frame(emu_frame),
    .cam_delay(emu_cam_delay), .row_delay(emu_row_delay),
    .row_valid(emu_valid), .row_idx(emu_idx), .row_occ(emu_occ), .busy(emu_busy));

  logic           src_valid;
  logic [RFW-1:0] src_data;
  always_comb begin
    src_valid = emu_mode ? emu_valid : dec_valid;
    src_data  = emu_mode ? {emu_idx, emu_occ} : {dec_idx, dec_occ};
  end

  // ---- row FIFO ----
  logic           rf_in_ready, rf_out_valid, rf_out_ready;
  logic [RFW-1:0] rf_out;
  sync_fifo #(.WIDTH(RFW), .DEPTH(ROW_FIFO_DEPTH)) u_row_fifo (
    .clk, .rst_n, .in_valid(src_valid), .in_ready(rf_in_ready), .in_data(src_data),
    .out_valid(rf_out_valid), .out_ready(rf_out_ready), .out_data(rf_out), .full_seen());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         row_overflow <= 1'b0;
    else if (src_valid && !rf_in_ready) row_overflow <= 1'b1;
  end

  // ---- planner ----
  logic                  p_valid, p_ready, p_busy, p_done, p_success;
  axis_e                 p_axis;
  logic [IW-1:0]         p_line;
  logic [CW-1:0]         p_count;
  logic [K-1:0][IW-1:0]  p_src, p_dst;

  tetris_planner #(.COLS(COLS), .ROWS(ROWS), .K(K)) u_plan (
    .clk, .rst_n, .start, .target,
    .row_valid(rf_out_valid), .row_ready(rf_out_ready),
    .row_idx(rf_out[RFW-1 -: RIW]), .row_occ(rf_out[COLS-1:0]),
    .mv_valid(p_valid), .mv_ready(p_ready), .mv_axis(p_axis), .mv_line(p_line),
    .mv_count(p_count), .mv_src(p_src), .mv_dst(p_dst),
    .busy(p_busy), .done(p_done), .success(p_success), .trunc_seen, .n_stalls);

  // ---- move FIFO ----
  logic                  q_valid, q_ready;
  logic [MFW-1:0]        q_data;
  sync_fifo #(.WIDTH(MFW), .DEPTH(MOVE_FIFO_DEPTH)) u_move_fifo (
    .clk, .rst_n, .in_valid(p_valid), .in_ready(p_ready),
    .in_data({p_axis, p_line, p_count, p_src, p_dst}),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data), .full_seen(move_queue_full_seen));

  axis_e                 q_axis;
  logic [IW-1:0]         q_line;
  logic [CW-1:0]         q_count;
  logic [K-1:0][IW-1:0]  q_src, q_dst;
  assign {q_axis, q_line, q_count, q_src, q_dst} = q_data;

  // ---- waveform generator ----
  logic dwg_busy;
  dwg #(.K(K), .IW(IW)) u_dwg (
    .clk, .rst_n, .cfg(dwg_cfg), .comp_we, .comp_waddr, .comp_wdata,
    .mv_valid(q_valid), .mv_ready(q_ready), .mv_axis(q_axis), .mv_line(q_line),
    .mv_count(q_count), .mv_src(q_src), .mv_dst(q_dst),
    .x_out(dac_x), .y_out(dac_y), .busy(dwg_busy), .move_done(move_done),
    .n_row_moves, .n_col_moves, .n_mode_switches);

  // ---- frame completion ----
  logic plan_finished;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      plan_finished <= 1'b0; done <= 1'b0; success <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) plan_finished <= 1'b0;
      else if (p_done) begin plan_finished <= 1'b1; success <= p_success; end
      else if (plan_finished && !q_valid && !dwg_busy) begin
        plan_finished <= 1'b0;
        done          <= 1'b1;
      end
    end
  end

  assign busy = p_busy || plan_finished || dwg_busy || q_valid || emu_busy;
endmodule
