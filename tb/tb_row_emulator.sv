// tb_row_emulator: replays random frames with given camera and row delays and
// checks each emitted row's content, index and the exact clock it appears.
module tb_row_emulator;
  localparam int COLS = rearr_pkg::N_COLS;
  localparam int ROWS = rearr_pkg::N_ROWS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0;
  logic [ROWS-1:0][COLS-1:0] frame;
  logic [31:0] cam_delay, row_delay;
  logic row_valid, busy;
  logic [$clog2(ROWS)-1:0] row_idx;
  logic [COLS-1:0] row_occ;

  row_emulator u_dut (.clk, .rst_n, .start, .frame, .cam_delay, .row_delay,
                      .row_valid, .row_idx, .row_occ, .busy);

  longint cyc = 0, t_start;
  int nrow;
  logic [ROWS-1:0][COLS-1:0] sent;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && row_valid) begin
    longint expect_t;
    // start sampled at t_start; S_CAM for cam_delay+1 clocks, then row_delay+1 per row
    expect_t = t_start + 1 + (cam_delay + 1) + longint'(nrow + 1) * (row_delay + 1);
    checks++;
    if (row_idx != nrow[$clog2(ROWS)-1:0] || row_occ != sent[nrow] || cyc != expect_t) begin
      failures++;
      if (failures < 6) $display("FAIL row %0d idx=%0d at %0d exp %0d", nrow, row_idx, cyc, expect_t);
    end
    nrow++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) frame[r][c] = $urandom_range(0, 1) == 1;
      sent = frame;
      cam_delay = $urandom_range(0, 40);
      row_delay = $urandom_range(0, 9);
      nrow = 0;
      @(negedge clk);
      start = 1; t_start = cyc;
      @(negedge clk); start = 0;
      // the frame is latched: scrambling the input must not matter
      frame = '0;
      while (busy) @(negedge clk);
      repeat (3) @(negedge clk);
      checks++;
      if (nrow != ROWS) begin failures++; $display("FAIL frame %0d rows=%0d", f, nrow); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
