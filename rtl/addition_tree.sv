// addition_tree: pipelined sum of N signed inputs.
//
// The inputs are zero-padded to the next power of two and added pairwise in
// LEVELS = ceil(log2 N) registered levels (at least one), so a new set of
// inputs can enter every clock and its sum appears LEVELS clocks later. The
// output is W + LEVELS bits wide and never overflows. In the waveform
// generator one tree per interleaved lane sums the K rescaled single tones
// into the multi-tone sample.
module addition_tree #(
  parameter int N = rearr_pkg::N_TWEEZ,
  parameter int W = rearr_pkg::SAMPLE_W,
  localparam int LEVELS = (N > 1) ? $clog2(N) : 1,
  localparam int OW = W + LEVELS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [N-1:0][W-1:0] in,
  output logic signed [OW-1:0]   sum
);
  localparam int NP = 2 ** LEVELS;

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int NL = NP >> l;
    logic signed [OW-1:0] v [NL];
    if (l == 0) begin : g_in
      always_comb
        for (int i = 0; i < NL; i++)
          v[i] = (i < N) ? OW'($signed(in[i])) : '0;
    end else begin : g_add
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int i = 0; i < NL; i++) v[i] <= '0;
        else        for (int i = 0; i < NL; i++) v[i] <= g_lvl[l-1].v[2*i] + g_lvl[l-1].v[2*i+1];
      end
    end
  end

  assign sum = g_lvl[LEVELS].v[0];
endmodule
