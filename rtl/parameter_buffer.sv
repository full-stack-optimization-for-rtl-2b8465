// parameter_buffer: on-chip store for the parameters of the next tile.
//
// Holds, for one tile, the packed 8-bit weights of every cell (one array
// row of COLS codes per entry), the ACC_W-bit bias of every row and the
// 3-bit channel-shift direction of every input lane. It is written from
// off-chip memory through one port (we, wsel, waddr, wdata):
//   PB_WEIGHT: waddr = array row, wdata = COLS packed weight codes
//   PB_BIAS:   waddr = array row, wdata[ACC_W-1:0] = bias
//   PB_DIR:    waddr = column,    wdata[3*8-1:0] = directions of its 8 lanes
// A Load Params instruction reads the weights row by row (w_raddr, data one
// cycle later) while the biases and directions are offered in parallel.
// Because the array keeps its own copy of the weights, the buffer can be
// refilled for the next tile while the current tile is multiplying. The
// write format is this design's choice.
module parameter_buffer
  import accel_pkg::*;
#(
  parameter int ROWS  = 128,
  parameter int COLS  = 64,
  parameter int ACC_W = 32,
  localparam int NB   = COLS * LANES,
  localparam int PAW  = $clog2(ROWS > COLS ? ROWS : COLS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          we,
  input  pbsel_e                        wsel,
  input  logic [PAW-1:0]                waddr,
  input  logic [COLS*8-1:0]             wdata,
  input  logic [$clog2(ROWS)-1:0]       w_raddr,
  output logic [COLS*8-1:0]             w_rdata,
  output logic [ROWS-1:0][ACC_W-1:0]    bias,
  output shdir_e [NB-1:0]               dir
);
  logic [COLS*8-1:0] wmem [ROWS];

  always_ff @(posedge clk) begin
    if (we && wsel == PB_WEIGHT) wmem[waddr[$clog2(ROWS)-1:0]] <= wdata;
    w_rdata <= wmem[w_raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bias <= '0;
      dir  <= '{default: SH_NONE};
    end else if (we) begin
      if (wsel == PB_BIAS)
        bias[waddr[$clog2(ROWS)-1:0]] <= wdata[ACC_W-1:0];
      if (wsel == PB_DIR)
        for (int l = 0; l < LANES; l++)
          dir[int'(waddr[$clog2(COLS)-1:0])*LANES + l] <= shdir_e'(wdata[3*l +: 3]);
    end
  end
endmodule
