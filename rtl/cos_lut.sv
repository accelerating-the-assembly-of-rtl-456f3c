// cos_lut: registered cosine table for the DDS cores.
//
// Holds one full period of cos() in 2^AW entries of OW-bit signed samples,
// entry a = round(MAXV * cos(2*pi*a / 2^AW)) with MAXV = 2^(OW-1) - 1. The
// table is a constant computed at elaboration from that formula, so it maps
// to a ROM. One clock of latency from `addr` to `data`.
module cos_lut #(
  parameter int AW = rearr_pkg::LUT_AW,
  parameter int OW = rearr_pkg::SAMPLE_W
) (
  input  logic                 clk,
  input  logic [AW-1:0]        addr,
  output logic signed [OW-1:0] data
);
  typedef logic signed [OW-1:0] tab_t [2**AW];

  function automatic tab_t gen_table();
    tab_t t;
    real  maxv, x;
    maxv = real'((2**(OW-1)) - 1);
    for (int a = 0; a < 2**AW; a++) begin
      x = maxv * $cos(2.0 * 3.14159265358979323846 * real'(a) / real'(2**AW));
      t[a] = OW'($rtoi(x + ((x >= 0.0) ? 0.5 : -0.5)));
    end
    return t;
  endfunction

  localparam tab_t TABLE = gen_table();

  always_ff @(posedge clk) data <= TABLE[addr];
endmodule
