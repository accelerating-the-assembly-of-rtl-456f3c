// sync_fifo: single-clock first-in first-out buffer with valid/ready on both
// sides. Used between the decoder and the Tetris planner (occupancy rows) and
// between the planner and the waveform generator (planned moves).
//
// Storage is a DEPTH-entry array written at the tail and read at the head; the
// head entry is presented combinationally (first-word fall-through). A write is
// accepted when in_ready (not full), a read when out_valid (not empty); both may
// happen in the same clock. `full_seen` is a sticky flag raised the first time
// the buffer fills, so back-pressure can be observed. DEPTH must be a power of two.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             full_seen
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      cnt;

  wire do_wr = in_valid  && in_ready;
  wire do_rd = out_valid && out_ready;

  assign in_ready  = (cnt != (AW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; full_seen <= 1'b0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (!in_ready) full_seen <= 1'b1;
    end
  end

  // A full buffer never accepts, an empty one never delivers.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt <= (AW+1)'(DEPTH));
endmodule
