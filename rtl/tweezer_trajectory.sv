// tweezer_trajectory: frequency sweep of one mobile tweezer between two sites.
//
// The tweezer position is its AOD drive frequency, kept as a fixed-point value
// (PW integer bits, FRAC fraction bits). On `load` it is set to f_src and the
// destination f_dst is stored. From `go` on, every clock the velocity grows by
// `accel` until it reaches `vmax`, the distance covered while accelerating is
// remembered, and once the remaining distance is no larger than that distance
// the velocity shrinks by `accel` again (never below one `accel` step) so the
// sweep ends symmetrically; the last step is clipped so the position lands
// exactly on f_dst. The deceleration steps retrace the acceleration steps in
// reverse (first at the current speed, then one `accel` less each clock), and
// the remembered distance shrinks with them, so the profile is symmetric. `arrived` is high whenever position equals destination,
// including before `go` for a zero-length move.
//
// freq is the integer part of the position, one clock after the update.
//
// Following the described system: fixed acceleration up to a maximum velocity
// and the reverse approaching the destination. Own choices: the deceleration
// rule (mirror of the acceleration distance) and the fixed-point format.
module tweezer_trajectory #(
  parameter int PW   = rearr_pkg::PHASE_W,
  parameter int FRAC = rearr_pkg::FRAC_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [PW-1:0] f_src,
  input  logic [PW-1:0] f_dst,
  input  logic          go,
  input  logic [31:0]   accel,
  input  logic [31:0]   vmax,
  output logic [PW-1:0] freq,
  output logic          arrived
);
  localparam int XW = PW + FRAC;

  logic [XW-1:0] pos, dst, d_acc;
  logic [31:0]   v;
  logic          run, up;

  logic [XW-1:0] rem, step;
  logic [31:0]   a_eff, v_n, v_step;
  logic          decel, accel_ph;

  always_comb begin
    rem      = up ? (dst - pos) : (pos - dst);
    a_eff    = (accel == '0) ? 32'd1 : accel;
    decel    = (rem <= d_acc) && (v != '0);
    accel_ph = !decel && (v < vmax);
    if (decel) begin
      // mirror of the acceleration: step at the current speed, then slow down
      v_step = v;
      v_n    = (v > a_eff) ? (v - a_eff) : a_eff;
    end else if (accel_ph) begin
      v_n    = ((v + a_eff) > vmax) ? vmax : (v + a_eff);
      v_step = v_n;
    end else begin
      v_n    = v;
      v_step = v;
    end
    step = (XW'(v_step) > rem) ? rem : XW'(v_step);
  end

  assign freq    = pos[XW-1:FRAC];
  assign arrived = (pos == dst);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos <= '0; dst <= '0; d_acc <= '0; v <= '0; run <= 1'b0; up <= 1'b1;
    end else if (load) begin
      pos   <= {f_src, FRAC'(0)};
      dst   <= {f_dst, FRAC'(0)};
      up    <= (f_dst >= f_src);
      d_acc <= '0;
      v     <= '0;
      run   <= 1'b0;
    end else begin
      if (go) run <= 1'b1;
      if ((run || go) && rem != '0) begin
        v   <= v_n;
        pos <= up ? (pos + step) : (pos - step);
        if (accel_ph)   d_acc <= d_acc + XW'(v_n);
        else if (decel) d_acc <= (d_acc > XW'(v_step)) ? (d_acc - XW'(v_step)) : '0;
      end
    end
  end
endmodule
