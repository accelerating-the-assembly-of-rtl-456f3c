// emccd_model: behavioural model of the camera's pixel output (not
// synthesizable). On a `start` pulse it streams one frame of an image of the
// occupancy pattern `occ` over a Camera Link style parallel bus: fval high for
// the frame, lval high for each pixel line, dval high for each pixel (with an
// occasional idle cycle inside a line). Site (r, c) covers the PIX x PIX pixel
// block at (X0 + PIX*c, Y0 + PIX*r); pixels of an occupied site read BRIGHT,
// all others BG, each plus uniform noise in [0, NOISE). Lines are separated by
// HBLANK idle clocks. `line_count` counts lines sent, `busy` is high while
// streaming.
module emccd_model #(
  parameter int COLS   = 8,
  parameter int ROWS   = 8,
  parameter int PIX    = 3,
  parameter int X0     = 2,
  parameter int Y0     = 1,
  parameter int XPAD   = 3,
  parameter int YPAD   = 2,
  parameter int HBLANK = 4,
  parameter int BRIGHT = 900,
  parameter int BG     = 100,
  parameter int NOISE  = 60
) (
  input  logic                      clk,
  input  logic                      start,
  input  logic [ROWS-1:0][COLS-1:0] occ,
  output logic                      fval,
  output logic                      lval,
  output logic                      dval,
  output logic [15:0]               pix,
  output logic                      busy,
  output int                        line_count
);
  localparam int NX = X0 + PIX * COLS + XPAD;
  localparam int NY = Y0 + PIX * ROWS + YPAD;

  initial begin
    fval = 0; lval = 0; dval = 0; pix = 0; busy = 0; line_count = 0;
  end

  always @(posedge clk) begin
    if (start && !busy) begin
      busy <= 1'b1;
      @(posedge clk);
      fval <= 1'b1;
      repeat (2) @(posedge clk);
      for (int y = 0; y < NY; y++) begin
        lval <= 1'b1;
        for (int x = 0; x < NX; x++) begin
          if ($urandom_range(0, 15) == 0) begin
            dval <= 1'b0;
            @(posedge clk);
          end
          begin
            int r, c;
            bit on;
            r = (y - Y0) / PIX; c = (x - X0) / PIX;
            on = (y >= Y0) && (x >= X0) && (r < ROWS) && (c < COLS) && occ[r][c];
            pix  <= 16'(on ? BRIGHT + $urandom_range(0, NOISE - 1) : BG + $urandom_range(0, NOISE - 1));
            dval <= 1'b1;
          end
          @(posedge clk);
        end
        dval <= 1'b0;
        lval <= 1'b0;
        line_count <= line_count + 1;
        repeat (HBLANK) @(posedge clk);
      end
      fval <= 1'b0;
      busy <= 1'b0;
    end
  end
endmodule
