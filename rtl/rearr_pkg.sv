// rearr_pkg: constants and configuration types shared by the atom-rearrangement
// pipeline (image decoder, Tetris planner, digital waveform generator).
//
// Numbers that come from the described system: a 1.2288 GS/s DAC fed with 8
// interleaved samples per fabric clock (fabric clock 153.6 MHz, i.e. the 6.51 ns
// minimum frequency-update step), a 24-bit phase accumulator (1.2288 GHz / 2^24
// = 73.24 Hz frequency resolution), 16-bit DAC samples, 3x3 camera pixels per
// tweezer site, a 44x44 reservoir and 32 simultaneous mobile tweezers.
// Everything else here (fixed-point formats, configuration fields) is a choice of
// this implementation.
package rearr_pkg;

  // Array and tweezer counts (defaults of the top level).
  localparam int N_COLS     = 44;   // reservoir columns (L)
  localparam int N_ROWS     = 44;   // reservoir rows (W)
  localparam int N_TWEEZ    = 32;   // simultaneous mobile tweezers / DDS channels (K)

  // Waveform generation.
  localparam int LANES      = 8;    // interleaved DDS cores per DDS
  localparam int PHASE_W    = 24;   // phase accumulator / tuning word width
  localparam int SAMPLE_W   = 16;   // DAC sample width
  localparam int AMP_W      = 16;   // unsigned amplitude, 16'hFFFF ~ 1.0
  localparam int LUT_AW     = 10;   // cosine table address bits (phase MSBs used)
  localparam int FRAC_W     = 16;   // fraction bits of trajectory frequency
  localparam int FX_W       = PHASE_W + FRAC_W;  // fixed-point frequency width

  // Camera.
  localparam int PIX_W      = 16;   // EMCCD pixel word
  localparam int PIX_PER_SITE = 3;  // pixels per site along each axis

  // Move axis: a row move sweeps X tones with Y fixed; a column move the reverse.
  typedef enum logic {AXIS_ROW = 1'b0, AXIS_COL = 1'b1} axis_e;

  // Run-time configuration of the waveform generator (written by the host).
  typedef struct packed {
    logic [PHASE_W-1:0] f0_x;        // X tuning word of column 0
    logic [PHASE_W-1:0] df_x;        // X tuning-word step per column
    logic [PHASE_W-1:0] f0_y;        // Y tuning word of row 0
    logic [PHASE_W-1:0] df_y;        // Y tuning-word step per row
    logic [15:0]        ramp_step;   // intensity-ramp increment per clock (full scale 16'hFFFF)
    logic [31:0]        accel;       // velocity increment per clock (FRAC_W fraction bits)
    logic [31:0]        vmax;        // maximum velocity (tuning word per clock, FRAC_W fraction bits)
    logic [AMP_W-1:0]   amp_single;  // amplitude of the single (fixed-axis) tone
  } dwg_cfg_t;

  // Run-time configuration of the image decoder.
  typedef struct packed {
    logic [11:0] x0;         // first pixel column of site column 0
    logic [11:0] y0;         // first pixel row of site row 0
    logic [23:0] threshold;  // site sum (PIX_PER_SITE^2 pixels) at or above which a site is occupied
  } dec_cfg_t;

endpackage
