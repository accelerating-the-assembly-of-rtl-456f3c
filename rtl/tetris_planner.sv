// tetris_planner: the Tetris rearrangement strategy as a hardware state machine.
//
// The target geometry is given per column i as a ROWS-bit mask target[i] of the
// target rows in that column (the ordered set R_i). On `start` the planner
// copies it into rem[] (R_i^(1) = R_i) and clears assigned[]. Then:
//
//  1. Row-by-row rearrangement (Tetrimino construction). For each occupancy row
//     k (taken in order as the decoder delivers it) the n = min(atoms, K)
//     columns with the smallest lowest-open-target-row are chosen
//     (tetris_row_select), the row's atoms are paired in order with those
//     columns (pair_matcher) and the pairs are issued as one row move. Each
//     chosen column gives up its lowest open target row, and assigned[i][k]
//     records that row k now holds an atom destined for column i. Atoms that
//     are not paired stay where they are. The row's move depends only on this
//     row and on rem[], so it is issued while later rows are still being read.
//  2. Examination. After row ROWS-1, every rem[i] must be empty; otherwise the
//     attempt is abandoned (done with success = 0) and no compression is issued.
//  3. Column-by-column compression (Tetrimino elimination). For every column
//     with targets, the rows in assigned[i] are paired in order with the
//     column's target rows and issued as one column move.
//
// Interface: valid/ready for occupancy rows in and for moves out; a move is a
// registered descriptor (axis, line, count, K source and K destination indices)
// held until taken. A row is accepted only when the move register is free, so
// a full move queue stalls the planner (counted in n_stalls). done pulses once
// per frame. trunc_seen flags a column move that needed more than K tweezers.
//
// Timing: a row is planned in the clock it is accepted, its move is available
// the next clock; a column move takes one clock each.
//
// Following the described algorithm exactly for the choice of columns, the
// pairing order, the R update, the examination and the compression. Own
// choices: the bit-mask representation, the cap of K atoms moved per row and
// that rows with nothing to move issue no move.
module tetris_planner
  import rearr_pkg::axis_e, rearr_pkg::AXIS_ROW, rearr_pkg::AXIS_COL;
#(
  parameter int COLS = rearr_pkg::N_COLS,
  parameter int ROWS = rearr_pkg::N_ROWS,
  parameter int K    = rearr_pkg::N_TWEEZ,
  localparam int IW  = $clog2((COLS > ROWS) ? COLS : ROWS),
  localparam int CW  = $clog2(K+1),
  localparam int RIW = $clog2(ROWS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [COLS-1:0][ROWS-1:0] target,
  // occupancy rows
  input  logic                      row_valid,
  output logic                      row_ready,
  input  logic [RIW-1:0]            row_idx,
  input  logic [COLS-1:0]           row_occ,
  // moves
  output logic                      mv_valid,
  input  logic                      mv_ready,
  output axis_e                     mv_axis,
  output logic [IW-1:0]             mv_line,
  output logic [CW-1:0]             mv_count,
  output logic [K-1:0][IW-1:0]      mv_src,
  output logic [K-1:0][IW-1:0]      mv_dst,
  // status
  output logic                      busy,
  output logic                      done,
  output logic                      success,
  output logic                      trunc_seen,
  output logic [31:0]               n_stalls
);
  localparam int CCW = $clog2(COLS+1);
  typedef enum logic [1:0] {S_IDLE, S_ROWS, S_EXAM, S_COLS} state_e;

  state_e                    state;
  logic [COLS-1:0][ROWS-1:0] rem, tgt_q, assigned;
  logic [CCW-1:0]            col;

  // ---- row planning (combinational) ----
  logic [CCW-1:0]            n_atoms, n_cap;
  logic [COLS-1:0]           sel;
  logic [CCW-1:0]            nsel;
  logic [CW-1:0]             r_count;
  logic [K-1:0][$clog2(COLS)-1:0] r_src, r_dst;
  logic                      r_trunc;

  always_comb begin
    n_atoms = '0;
    for (int c = 0; c < COLS; c++) n_atoms = n_atoms + CCW'(row_occ[c]);
    n_cap = (n_atoms > CCW'(K)) ? CCW'(K) : n_atoms;
  end

  tetris_row_select #(.COLS(COLS), .ROWS(ROWS)) u_sel (.rem, .n(n_cap), .sel, .nsel);
  pair_matcher #(.N(COLS), .K(K)) u_rowpair (
    .src(row_occ), .dst(sel), .count(r_count), .src_idx(r_src), .dst_idx(r_dst), .trunc(r_trunc));

  // ---- column compression (combinational) ----
  logic [CW-1:0]                  c_count;
  logic [K-1:0][$clog2(ROWS)-1:0] c_src, c_dst;
  logic                           c_trunc;
  logic [$clog2(COLS)-1:0]        col_i;
  assign col_i = col[$clog2(COLS)-1:0];

  pair_matcher #(.N(ROWS), .K(K)) u_colpair (
    .src(assigned[col_i]), .dst(tgt_q[col_i]), .count(c_count), .src_idx(c_src), .dst_idx(c_dst), .trunc(c_trunc));

  wire take_row = (state == S_ROWS) && row_valid && row_ready;
  wire mv_free  = !mv_valid || mv_ready;
  assign row_ready = (state == S_ROWS) && !mv_valid;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; rem <= '0; tgt_q <= '0; assigned <= '0; col <= '0;
      mv_valid <= 1'b0; mv_axis <= AXIS_ROW; mv_line <= '0; mv_count <= '0;
      mv_src <= '0; mv_dst <= '0;
      done <= 1'b0; success <= 1'b0; trunc_seen <= 1'b0; n_stalls <= '0;
    end else begin
      done <= 1'b0;
      if (mv_valid && mv_ready) mv_valid <= 1'b0;
      if ((state == S_ROWS) && row_valid && !row_ready) n_stalls <= n_stalls + 1'b1;

      case (state)
        S_IDLE: if (start) begin
          rem <= target; tgt_q <= target; assigned <= '0; col <= '0;
          success <= 1'b0; trunc_seen <= 1'b0;
          state <= S_ROWS;
        end

        S_ROWS: if (take_row) begin
          mv_valid <= (r_count != '0);
          mv_axis  <= AXIS_ROW;
          mv_line  <= IW'(row_idx);
          mv_count <= r_count;
          for (int k = 0; k < K; k++) begin
            mv_src[k] <= IW'(r_src[k]);
            mv_dst[k] <= IW'(r_dst[k]);
          end
          for (int c = 0; c < COLS; c++) begin
            if (sel[c]) rem[c] <= rem[c] & (rem[c] - 1'b1);   // drop lowest set bit
            assigned[c][row_idx] <= sel[c];
          end
          if (r_trunc) trunc_seen <= 1'b1;
          if (row_idx == RIW'(ROWS-1)) state <= S_EXAM;
        end

        S_EXAM: begin
          if (rem == '0) begin
            state <= S_COLS;
            col   <= '0;
          end else begin
            done    <= 1'b1;
            success <= 1'b0;
            state   <= S_IDLE;
          end
        end

        S_COLS: if (mv_free) begin
          if (col == CCW'(COLS)) begin
            done    <= 1'b1;
            success <= 1'b1;
            state   <= S_IDLE;
          end else begin
            mv_valid <= (c_count != '0);
            mv_axis  <= AXIS_COL;
            mv_line  <= IW'(col_i);
            mv_count <= c_count;
            for (int k = 0; k < K; k++) begin
              mv_src[k] <= IW'(c_src[k]);
              mv_dst[k] <= IW'(c_dst[k]);
            end
            if (c_trunc) trunc_seen <= 1'b1;
            col <= col + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_move_held: assert property (@(posedge clk) disable iff (!rst_n)
    (mv_valid && !mv_ready) |=> (mv_valid && $stable(mv_src) && $stable(mv_dst) && $stable(mv_line)));
  // count of tweezers never exceeds the number of selected columns
  a_rowcount: assert property (@(posedge clk) disable iff (!rst_n)
    take_row |-> (CCW'(r_count) == nsel));
endmodule
