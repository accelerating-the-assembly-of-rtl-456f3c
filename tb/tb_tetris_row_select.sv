// tb_tetris_row_select: random remaining-target masks and atom counts; the
// selected column set must equal the first n columns of a stable sort of the
// columns by their lowest open target row (reference model).
module tb_tetris_row_select;
  import tetris_ref_pkg::*;
  localparam int COLS = rearr_pkg::N_COLS;
  localparam int ROWS = rearr_pkg::N_ROWS;
  localparam int CW = $clog2(COLS+1);

  logic [COLS-1:0][ROWS-1:0] rem;
  logic [CW-1:0] n, nsel;
  logic [COLS-1:0] sel;
  int checks = 0, failures = 0;

  tetris_row_select u_dut (.rem, .n, .sel, .nsel);

  initial begin
    for (int t = 0; t < 400; t++) begin
      iq_t R[], A[], occ, src, dst;
      logic [COLS-1:0] exp_sel;
      int nn, density;
      R = new[COLS]; A = new[COLS];
      density = $urandom_range(0, 3);
      for (int i = 0; i < COLS; i++)
        for (int r = 0; r < ROWS; r++) begin
          rem[i][r] = (density == 0) ? ($urandom_range(0, 15) == 0) : ($urandom_range(0, 3) < density);
          if (rem[i][r]) R[i].push_back(r);
        end
      nn = $urandom_range(0, COLS);
      n = CW'(nn);
      occ = {};
      for (int a = 0; a < nn; a++) occ.push_back(a);
      plan_row(R, A, 0, occ, COLS, src, dst);
      exp_sel = '0;
      foreach (dst[a]) exp_sel[dst[a]] = 1'b1;
      #1;
      checks++;
      if (sel !== exp_sel || nsel != CW'(dst.size())) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d n=%0d sel=%h exp=%h", t, nn, sel, exp_sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
