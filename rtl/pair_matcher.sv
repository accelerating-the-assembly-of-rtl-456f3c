// pair_matcher: order-preserving pairing of two bit masks.
//
// The i-th set bit of `src` (counting from index 0) is paired with the i-th set
// bit of `dst`, for i < count = min(popcount(src), popcount(dst), K). Because
// both lists are in ascending order, sources and destinations keep their order
// and no two moving atoms cross, which is how the Tetris strategy avoids
// collisions. The same unit serves both move kinds:
//  * row move: src = occupied columns of the row, dst = selected columns T^(k);
//  * column compression: src = rows whose atom was assigned to this column,
//    dst = the column's target rows.
// `trunc` is set when more than K pairs would exist and the excess was dropped.
//
// Combinational: a prefix count gives each set bit its rank, and the bit
// index is scattered into slot `rank` of the output list. Unused slots are 0.
module pair_matcher #(
  parameter int N = rearr_pkg::N_COLS,
  parameter int K = rearr_pkg::N_TWEEZ
) (
  input  logic [N-1:0]                  src,
  input  logic [N-1:0]                  dst,
  output logic [$clog2(K+1)-1:0]        count,
  output logic [K-1:0][$clog2(N)-1:0]   src_idx,
  output logic [K-1:0][$clog2(N)-1:0]   dst_idx,
  output logic                          trunc
);
  localparam int IW = $clog2(N);
  localparam int CW = $clog2(N+1);

  logic [CW-1:0] ns, nd, ncommon;

  always_comb begin
    logic [CW-1:0] rs, rd;
    rs = '0; rd = '0;
    src_idx = '0; dst_idx = '0;
    for (int b = 0; b < N; b++) begin
      if (src[b]) begin
        for (int k = 0; k < K; k++) if (rs == CW'(k)) src_idx[k] = IW'(b);
        rs = rs + 1'b1;
      end
      if (dst[b]) begin
        for (int k = 0; k < K; k++) if (rd == CW'(k)) dst_idx[k] = IW'(b);
        rd = rd + 1'b1;
      end
    end
    ns = rs;
    nd = rd;
    ncommon = (ns < nd) ? ns : nd;
    trunc = (ncommon > CW'(K));
    count = trunc ? ($clog2(K+1))'(K) : ($clog2(K+1))'(ncommon);
  end
endmodule
