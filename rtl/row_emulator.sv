// row_emulator: stand-in for camera and decoder when the system is exercised
// with host-generated loading patterns instead of real images.
//
// On `start` it copies the supplied occupancy frame, waits cam_delay clocks (the
// camera's read-out latency after exposure), then for every row waits row_delay
// clocks (the time the decoder would spend on that row's pixel lines) and
// emits the row with row_valid for one clock. `busy` is high from start to the
// last row. The downstream logic therefore sees the same row timing as with the
// camera attached, which keeps measured total times representative.
//
// Following the described system: waiting the camera latency once and the
// decoding time before each row. Own choices: the frame is presented as a
// parallel port and the delays are run-time values in clocks.
module row_emulator #(
  parameter int COLS = rearr_pkg::N_COLS,
  parameter int ROWS = rearr_pkg::N_ROWS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [ROWS-1:0][COLS-1:0] frame,
  input  logic [31:0]             cam_delay,
  input  logic [31:0]             row_delay,
  output logic                    row_valid,
  output logic [$clog2(ROWS)-1:0] row_idx,
  output logic [COLS-1:0]         row_occ,
  output logic                    busy
);
  typedef enum logic [1:0] {S_IDLE, S_CAM, S_ROW} state_e;
  state_e                    state;
  logic [31:0]               timer;
  logic [$clog2(ROWS+1)-1:0] row;
  logic [ROWS-1:0][COLS-1:0] held;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; timer <= '0; row <= '0; held <= '0;
      row_valid <= 1'b0; row_idx <= '0; row_occ <= '0;
    end else begin
      row_valid <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          held  <= frame;
          timer <= cam_delay;
          row   <= '0;
          state <= S_CAM;
        end
        S_CAM: begin
          if (timer == '0) begin timer <= row_delay; state <= S_ROW; end
          else timer <= timer - 1'b1;
        end
        S_ROW: begin
          if (timer == '0) begin
            row_valid <= 1'b1;
            row_idx   <= row[$clog2(ROWS)-1:0];
            row_occ   <= held[row[$clog2(ROWS)-1:0]];
            timer     <= row_delay;
            row       <= row + 1'b1;
            if (row == ($clog2(ROWS+1))'(ROWS-1)) state <= S_IDLE;
          end else timer <= timer - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
