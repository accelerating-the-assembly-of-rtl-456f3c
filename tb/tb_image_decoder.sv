// tb_image_decoder: streams random occupancy frames through the camera model
// into the decoder and checks every decoded row (index, occupancy bits) and
// that each row appears within two clocks of the end of its last pixel line,
// i.e. before the rest of the image has been read.
module tb_image_decoder;
  import rearr_pkg::*;
  localparam int COLS = rearr_pkg::N_COLS;
  localparam int ROWS = rearr_pkg::N_ROWS;
  localparam int X0 = 2, Y0 = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic start = 0;
  logic [ROWS-1:0][COLS-1:0] occ;
  logic fval, lval, dval, busy;
  logic [15:0] pix;
  int line_count;
  dec_cfg_t cfg;
  logic row_valid, frame_done;
  logic [$clog2(ROWS)-1:0] row_idx;
  logic [COLS-1:0] row_occ;

  emccd_model #(.COLS(COLS), .ROWS(ROWS), .X0(X0), .Y0(Y0)) u_cam (
    .clk, .start, .occ, .fval, .lval, .dval, .pix, .busy, .line_count);

  image_decoder u_dut (.clk, .rst_n, .cfg, .fval, .lval, .dval, .pix,
                       .row_valid, .row_idx, .row_occ, .frame_done);

  int expect_row;
  int line_base;
  int rows_seen, frames_done;
  always @(posedge clk) if (rst_n) begin
    if (row_valid) begin
      checks++;
      if (row_idx != expect_row[$clog2(ROWS)-1:0] || row_occ != occ[expect_row]) begin
        failures++;
        $display("FAIL row %0d: idx=%0d occ=%h exp=%h", expect_row, row_idx, row_occ, occ[expect_row]);
      end
      // row k closes after line Y0 + 3k + 2 => line_count == Y0 + 3k + 3
      checks++;
      if (line_count - line_base != Y0 + PIX_PER_SITE * expect_row + PIX_PER_SITE) begin
        failures++;
        $display("FAIL latency row %0d at line %0d", expect_row, line_count);
      end
      expect_row++;
      rows_seen++;
    end
    if (frame_done) frames_done++;
  end

  initial begin
    cfg.x0 = 12'(X0); cfg.y0 = 12'(Y0);
    cfg.threshold = 24'(9 * 500);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          occ[r][c] = (f == 1) ? ((r + c) % 2 == 0) : ($urandom_range(0, 1) == 1);
      expect_row = 0;
      line_base = line_count;
      @(posedge clk); start <= 1; @(posedge clk); start <= 0;
      wait (busy); wait (!busy);
      repeat (5) @(posedge clk);
      checks++;
      if (expect_row != ROWS) begin failures++; $display("FAIL frame %0d: %0d rows", f, expect_row); end
    end
    checks++;
    if (frames_done != 3) begin failures++; $display("FAIL frame_done count %0d", frames_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
