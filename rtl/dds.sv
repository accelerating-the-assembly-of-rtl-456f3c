// dds: one direct digital synthesiser producing LANES consecutive DAC samples
// per fabric clock (LANES interleaved DDS cores).
//
// A PW-bit phase accumulator `acc` holds the phase of the first sample of the
// current clock. Core j produces the sample with phase acc + j*freq, and the
// accumulator then advances by LANES*freq, so the output is sample n =
// A * cos(phi0 + sum of freq over all earlier samples): the phase is continuous
// whatever the frequency does from one clock to the next, and frequency and
// amplitude may change every clock (every LANES samples). Each core looks up a
// cosine table with the top LUT_AW phase bits and scales by the unsigned
// amplitude (16'hFFFF ~ 1.0).
//
// Timing: freq/amp presented in clock c affect the samples output in clock c+3
// (phase register, table, multiplier). load_phase sets the accumulator to
// phase0 instead of advancing it (initial phase of a new tone).
//
// Following the described system: one DDS per tweezer built from 8 interleaved
// cores, a 24-bit accumulator (73.24 Hz steps at 1.2288 GS/s) and 16-bit
// samples. Own choices: the table size and the 3-stage pipeline.
module dds #(
  parameter int LANES  = rearr_pkg::LANES,
  parameter int PW     = rearr_pkg::PHASE_W,
  parameter int AMPW   = rearr_pkg::AMP_W,
  parameter int SW     = rearr_pkg::SAMPLE_W,
  parameter int LUT_AW = rearr_pkg::LUT_AW
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           load_phase,
  input  logic [PW-1:0]                  phase0,
  input  logic [PW-1:0]                  freq,
  input  logic [AMPW-1:0]                amp,
  output logic signed [LANES-1:0][SW-1:0] samples
);
  logic [PW-1:0]   acc;
  logic [PW-1:0]   ph   [LANES];
  logic [AMPW-1:0] amp_q, amp_qq;
  logic signed [SW-1:0] cosv [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; amp_q <= '0; amp_qq <= '0;
      for (int j = 0; j < LANES; j++) ph[j] <= '0;
    end else begin
      for (int j = 0; j < LANES; j++)
        ph[j] <= (load_phase ? phase0 : acc) + PW'(j) * freq;
      acc    <= (load_phase ? phase0 : acc) + PW'(LANES) * freq;
      amp_q  <= amp;
      amp_qq <= amp_q;
    end
  end

  for (genvar j = 0; j < LANES; j++) begin : g_core
    cos_lut #(.AW(LUT_AW), .OW(SW)) u_lut (.clk(clk), .addr(ph[j][PW-1 -: LUT_AW]), .data(cosv[j]));

    logic signed [SW+AMPW:0] prod;
    assign prod = cosv[j] * $signed({1'b0, amp_qq});
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) samples[j] <= '0;
      else        samples[j] <= prod[SW+AMPW-1 -: SW];
    end
  end
endmodule
