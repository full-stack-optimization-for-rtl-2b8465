// channel_shifter: channel shift operation, serialisation and input skew.
//
// Each layer begins with a channel shift: every input channel is moved by
// one pixel in its own direction (none, up, down, left, right; zeros move
// in at the border) so that 1x1 convolutions can see neighbouring pixels.
// For every output pixel the controller pulses issue with the pixel's
// input-map coordinates (ih, iw) (already multiplied by the stride). This
// block then
//   1. forms the five candidate read addresses (centre, and the four
//      neighbours) with their in-map checks, and gives each bank the one its
//      channel's direction selects (dir, captured on load);
//   2. one cycle later takes the bytes from the data buffer, substitutes 0
//      for a neighbour outside the map, notes which bytes are zero, and
//      loads them into per-channel parallel-to-serial registers;
//   3. streams every byte LSB first inside an ACC_W-cycle word (the bits
//      above bit 7 are zero, leaving room for the shifts by the weights) and
//      delays column c by c cycles, the skew the systolic array needs.
// Channel ch of the input map lives in bank ch. For a layer packed with g
// channels per column (column combining, g = 8 >> col_split), lane l of
// column c is fed from bank c*g + l and lanes l >= g carry zeros, so a
// C-channel layer occupies C/g columns.
// Shifting by address offset, the direction encoding, the stride handling
// and the col_split lane selection are this design's choices; the paper
// gives the operation and the block's place between data buffer and array.
//
// Timing: rd_addr is combinational from issue/ih/iw; the data buffer must
// return rd_data one cycle later. Bit 0 of column c leaves col_out[c] c+2
// cycles after issue, with its start flag set.
module channel_shifter
  import accel_pkg::*;
#(
  parameter int COLS = 64,
  parameter int AW   = 12,
  localparam int NB  = COLS * LANES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  shdir_e [NB-1:0]      dir_in,
  input  logic                 issue,
  input  logic [7:0]           ih,
  input  logic [7:0]           iw,
  input  logic [8:0]           in_h,
  input  logic [8:0]           in_w,
  input  logic [1:0]           col_split,
  output logic [NB-1:0][AW-1:0] rd_addr,
  input  logic [NB-1:0][7:0]   rd_data,
  output lane_t [COLS-1:0]     col_out
);
  shdir_e [NB-1:0] dir_q;
  logic [AW-1:0]   a_c, a_u, a_d, a_l, a_r;
  logic            v_u, v_d, v_l, v_r;
  logic [NB-1:0]   ok_q;
  logic            issued_q;
  logic [NB-1:0][7:0] ser_q;
  logic [NB-1:0]   zf_q;
  logic            start_q;
  lane_t [COLS-1:0] lane0;
  logic [NB-1:0][7:0] sel_byte;
  logic [NB-1:0]   sel_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    dir_q <= '{default: SH_NONE};
    else if (load) dir_q <= dir_in;
  end

  // Candidate addresses of the centre pixel and its neighbours.
  always_comb begin
    a_c = AW'(ih * in_w + iw);
    a_u = a_c + AW'(in_w);
    a_d = a_c - AW'(in_w);
    a_l = a_c + 1'b1;
    a_r = a_c - 1'b1;
    v_u = (9'(ih) + 9'd1) < in_h;
    v_d = ih != 8'd0;
    v_l = (9'(iw) + 9'd1) < in_w;
    v_r = iw != 8'd0;
  end

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      unique case (dir_q[b])
        SH_UP:    rd_addr[b] = a_u;
        SH_DOWN:  rd_addr[b] = a_d;
        SH_LEFT:  rd_addr[b] = a_l;
        SH_RIGHT: rd_addr[b] = a_r;
        default:  rd_addr[b] = a_c;
      endcase
    end
  end

  // Column combining: lane l of column c carries channel c*g + l for the
  // layer's g = 8 >> col_split channels per column; lanes l >= g are empty.
  // For g = 8 every lane simply carries its own bank.
  for (genvar b = 0; b < NB; b++) begin : g_lane
    localparam int C = b / LANES;
    localparam int L = b % LANES;
    always_comb begin
      sel_byte[b] = '0;
      sel_ok[b]   = 1'b0;
      unique case (col_split)
        2'd0: begin
          sel_byte[b] = rd_data[C*8 + L]; sel_ok[b] = ok_q[C*8 + L];
        end
        2'd1: if (L < 4) begin
          sel_byte[b] = rd_data[C*4 + L]; sel_ok[b] = ok_q[C*4 + L];
        end
        2'd2: if (L < 2) begin
          sel_byte[b] = rd_data[C*2 + L]; sel_ok[b] = ok_q[C*2 + L];
        end
        default: if (L < 1) begin
          sel_byte[b] = rd_data[C]; sel_ok[b] = ok_q[C];
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ok_q     <= '0;
      issued_q <= 1'b0;
      ser_q    <= '0;
      zf_q     <= '0;
      start_q  <= 1'b0;
    end else begin
      issued_q <= issue;
      for (int b = 0; b < NB; b++) begin
        unique case (dir_q[b])
          SH_UP:    ok_q[b] <= v_u;
          SH_DOWN:  ok_q[b] <= v_d;
          SH_LEFT:  ok_q[b] <= v_l;
          SH_RIGHT: ok_q[b] <= v_r;
          default:  ok_q[b] <= 1'b1;
        endcase
      end
      start_q <= issued_q;
      for (int b = 0; b < NB; b++) begin
        if (issued_q) begin
          ser_q[b] <= sel_ok[b] ? sel_byte[b] : 8'd0;
          zf_q[b]  <= !sel_ok[b] || (sel_byte[b] == 8'd0);
        end else begin
          ser_q[b] <= ser_q[b] >> 1;
        end
      end
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      lane0[c].start = start_q;
      for (int l = 0; l < LANES; l++) begin
        lane0[c].d[l]  = ser_q[c*LANES+l][0];
        lane0[c].zf[l] = zf_q[c*LANES+l];
      end
    end
  end

  // Skew: column c is delayed by c cycles.
  assign col_out[0] = lane0[0];
  for (genvar c = 1; c < COLS; c++) begin : g_skew
    lane_t dl [c];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < c; k++) dl[k] <= '0;
      end else begin
        dl[0] <= lane0[c];
        for (int k = 1; k < c; k++) dl[k] <= dl[k-1];
      end
    end
    assign col_out[c] = dl[c-1];
  end
endmodule
