// image_decoder: converts the camera's pixel stream into per-row atom occupancy.
//
// The EMCCD reads its image out one pixel row at a time. Each static tweezer
// site is imaged onto a PIX x PIX pixel block whose top-left pixel is
// (x0 + PIX*col, y0 + PIX*row). While the pixels of a site row stream in, the
// decoder adds every pixel into the accumulator of the site column it belongs
// to. When the line that closes the last of the PIX pixel rows of that site row
// ends, every accumulator is compared with the threshold and the COLS-bit
// occupancy word of that row is emitted (row_valid for one clock, with row_idx).
// The next site row starts from cleared accumulators, so occupancy leaves the
// decoder one clock after the row's last pixel line, long before the full image
// has been read out.
//
// Interface: Camera Link style strobes already deserialised and in this clock
// domain: fval (frame), lval (line), dval (pixel valid) and the pixel word.
// Pixels outside the site grid are ignored. frame_done pulses when fval falls.
//
// Following the described system: row-by-row decoding, a 3x3 pixel footprint per
// site and immediate hand-over of each row. This implementation's own choices:
// a plain sum-over-footprint threshold test, the grid origin and threshold as
// run-time configuration, and no storage of the image itself.
module image_decoder
  import rearr_pkg::*;
#(
  parameter int COLS = rearr_pkg::N_COLS,
  parameter int ROWS = rearr_pkg::N_ROWS,
  parameter int PIX  = rearr_pkg::PIX_PER_SITE,
  parameter int PW   = rearr_pkg::PIX_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  dec_cfg_t                cfg,
  input  logic                    fval,
  input  logic                    lval,
  input  logic                    dval,
  input  logic [PW-1:0]           pix,
  output logic                    row_valid,
  output logic [$clog2(ROWS)-1:0] row_idx,
  output logic [COLS-1:0]         row_occ,
  output logic                    frame_done
);
  localparam int ACC_W = PW + $clog2(PIX*PIX) + 1;
  localparam int CW    = $clog2(COLS+1);
  localparam int RW    = $clog2(ROWS+1);
  localparam int SW    = $clog2(PIX+1);

  logic [ACC_W-1:0] acc [COLS];
  logic [11:0]      xcnt, ycnt;      // pixel position within line / frame
  logic [CW-1:0]    scol;            // site column of the current pixel
  logic [SW-1:0]    subx;            // pixel within the site along x
  logic [RW-1:0]    srow;            // site row being accumulated
  logic [SW-1:0]    suby;            // pixel row within the site row
  logic             lval_q, fval_q;

  wire in_rows  = (ycnt >= cfg.y0) && (srow < RW'(ROWS));
  wire in_cols  = (xcnt >= cfg.x0) && (scol < CW'(COLS));
  wire take_pix = fval && lval && dval && in_rows && in_cols;
  wire line_end = lval_q && !lval && fval;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xcnt <= '0; ycnt <= '0; scol <= '0; subx <= '0; srow <= '0; suby <= '0;
      lval_q <= 1'b0; fval_q <= 1'b0;
      row_valid <= 1'b0; row_idx <= '0; row_occ <= '0; frame_done <= 1'b0;
      for (int c = 0; c < COLS; c++) acc[c] <= '0;
    end else begin
      lval_q     <= lval;
      fval_q     <= fval;
      row_valid  <= 1'b0;
      frame_done <= fval_q && !fval;

      if (!fval) begin
        ycnt <= '0; srow <= '0; suby <= '0; xcnt <= '0; scol <= '0; subx <= '0;
      end else begin
        // pixel columns
        if (lval && dval) begin
          xcnt <= xcnt + 1'b1;
          if (in_cols) begin
            if (subx == SW'(PIX-1)) begin subx <= '0; scol <= scol + 1'b1; end
            else subx <= subx + 1'b1;
          end
        end
        if (take_pix) begin
          if (suby == '0 && subx == '0) acc[scol[$clog2(COLS)-1:0]] <= ACC_W'(pix);
          else acc[scol[$clog2(COLS)-1:0]] <= acc[scol[$clog2(COLS)-1:0]] + ACC_W'(pix);
        end
        // end of a pixel line
        if (line_end) begin
          xcnt <= '0; scol <= '0; subx <= '0;
          ycnt <= ycnt + 1'b1;
          if (in_rows) begin
            if (suby == SW'(PIX-1)) begin
              suby      <= '0;
              srow      <= srow + 1'b1;
              row_valid <= 1'b1;
              row_idx   <= srow[$clog2(ROWS)-1:0];
              for (int c = 0; c < COLS; c++)
                row_occ[c] <= (acc[c] >= ACC_W'(cfg.threshold));
            end else begin
              suby <= suby + 1'b1;
            end
          end
        end
      end
    end
  end
endmodule
