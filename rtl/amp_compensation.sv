// amp_compensation: per-tweezer amplitude A_i(t) of the multi-tone drive.
//
// A_i = level * gain(f_i) for active tweezers, 0 otherwise. `level` is the
// common intensity ramp (0 .. 16'hFFFF) that hands atoms over smoothly between
// static and mobile traps. gain(f) is a 2^TAB_AW-entry table indexed by the top
// TAB_AW bits of the tweezer's tuning word and loaded by the host (write port
// we/waddr/wdata); it flattens the frequency response of the AOD so all
// tweezers have equal depth wherever they are. After reset every entry is
// 16'hFFFF (no correction). Products are truncated to AMPW bits.
//
// Timing: one clock from freq/level/active to amp.
//
// Following the described system: time-dependent amplitude for ramping and a
// compensation of the AOD's frequency response. Own choices: a piecewise-
// constant table indexed by frequency MSBs and its size.
module amp_compensation #(
  parameter int K      = rearr_pkg::N_TWEEZ,
  parameter int PW     = rearr_pkg::PHASE_W,
  parameter int AMPW   = rearr_pkg::AMP_W,
  parameter int TAB_AW = 6
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [K-1:0][PW-1:0]      freq,
  input  logic [K-1:0]              active,
  input  logic [AMPW-1:0]           level,
  input  logic                      we,
  input  logic [TAB_AW-1:0]         waddr,
  input  logic [AMPW-1:0]           wdata,
  output logic [K-1:0][AMPW-1:0]    amp
);
  logic [AMPW-1:0] gain [2**TAB_AW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < 2**TAB_AW; a++) gain[a] <= '1;
    end else if (we) begin
      gain[waddr] <= wdata;
    end
  end

  logic [K-1:0][AMPW-1:0] amp_n;
  always_comb begin
    for (int k = 0; k < K; k++) begin
      logic [2*AMPW-1:0] p;
      p = level * gain[freq[k][PW-1 -: TAB_AW]];
      amp_n[k] = active[k] ? p[2*AMPW-1 -: AMPW] : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) amp <= '0;
    else        amp <= amp_n;
  end
endmodule
