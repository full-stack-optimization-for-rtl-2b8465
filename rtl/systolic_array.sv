// systolic_array: the multiplication-free systolic array of SAC cells.
//
// ROWS x COLS sac_cell instances. Row r computes filter r of the loaded
// tile; column c holds up to 8 input channels combined into it by column
// combining, and each cell's packed weight says which of the 8 it uses.
//
// Dataflow (all streams bit-serial, LSB first, ACC_W-bit words):
//   * col_in[c] enters the register_chain of column c. Row r's cells read
//     taps r .. r+NSHIFT-1 of their column's chain.
//   * bias_in[r] seeds the partial sum of row r at column 0; each cell adds
//     its term and passes the sum right with one register of delay.
//   * row_out[r] leaves the right edge; row_start[r] marks its first bit.
//   * bias_start[r] tells row r's bias shifter when a word reaches column 0
//     of that row (the start flag at tap r of column 0).
// With col_in[c] skewed by c cycles (done by the channel shifter) a word
// entering at time t reaches cell (r,c) at t+r+c and leaves row r at
// t+r+COLS. Rows are therefore skewed by one cycle each on the output.
//
// Weights are loaded one row per cycle (w_row_we, w_row, w_data); that
// broadcast is this design's choice. cell_active reports which cells are
// computing (not zero-skipped) in the current cycle.
module systolic_array
  import accel_pkg::*;
#(
  parameter int ROWS = 128,
  parameter int COLS = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       w_row_we,
  input  logic [$clog2(ROWS)-1:0]    w_row,
  input  wcode_t [COLS-1:0]          w_data,
  input  lane_t  [COLS-1:0]          col_in,
  input  logic   [ROWS-1:0]          bias_in,
  output logic   [ROWS-1:0]          row_out,
  output logic   [ROWS-1:0]          row_start,
  output logic   [ROWS-1:0]          bias_start,
  output logic   [ROWS-1:0][COLS-1:0] cell_active
);
  localparam int NTAP = ROWS + NSHIFT - 1;

  lane_t [COLS-1:0][NTAP-1:0] taps;
  logic  [ROWS-1:0][COLS:0]   y;

  for (genvar c = 0; c < COLS; c++) begin : g_col
    register_chain #(.ROWS(ROWS)) u_chain (
      .clk (clk),
      .rst_n(rst_n),
      .d_in(col_in[c]),
      .taps(taps[c])
    );
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign y[r][0]       = bias_in[r];
    assign bias_start[r] = taps[0][r].start;
    for (genvar c = 0; c < COLS; c++) begin : g_cell
      sac_cell u_sac (
        .clk   (clk),
        .rst_n (rst_n),
        .w_we  (w_row_we && (w_row == r[$clog2(ROWS)-1:0])),
        .w_in  (w_data[c]),
        .win   (taps[c][r +: NSHIFT]),
        .y_in  (y[r][c]),
        .y_out (y[r][c+1]),
        .active(cell_active[r][c])
      );
    end
    assign row_out[r] = y[r][COLS];

    // The last cell's output register delays the word by one cycle.
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) row_start[r] <= 1'b0;
      else        row_start[r] <= taps[COLS-1][r].start;
    end
  end
endmodule
