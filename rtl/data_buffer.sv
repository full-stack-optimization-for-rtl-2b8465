// data_buffer: on-chip feature-map store, two halves used in ping-pong.
//
// The half selected by cur holds the current layer's input; the other half
// receives its output. After the last tile of a layer the controller flips
// cur, so the output becomes the next layer's input without any copy. Each
// half has NB banks, one per input lane of the systolic array (64 columns x
// 8 combined channels), so every lane reads its own byte each pixel; bank b
// holds channel b (and b+NB, b+2NB, ... further up in the address space for
// layers with more than NB channels).
//
// Ports: rd_addr/rd_data read the input half (one cycle latency); wr_* write
// the output half; hw_* is a single host write port into the input half
// (used to load an image). Bank layout and sizes are this design's choices.
module data_buffer #(
  parameter int NB    = 512,
  parameter int DEPTH = 4096,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  cur,
  input  logic [NB-1:0][AW-1:0] rd_addr,
  output logic [NB-1:0][7:0]    rd_data,
  input  logic [NB-1:0]         wr_en,
  input  logic [NB-1:0][AW-1:0] wr_addr,
  input  logic [NB-1:0][7:0]    wr_data,
  input  logic                  hw_en,
  input  logic [$clog2(NB)-1:0] hw_bank,
  input  logic [AW-1:0]         hw_addr,
  input  logic [7:0]            hw_data
);
  logic cur_q;
  logic [1:0][NB-1:0][7:0] rd_h;

  always_ff @(posedge clk) cur_q <= cur;

  for (genvar h = 0; h < 2; h++) begin : g_half
    for (genvar b = 0; b < NB; b++) begin : g_bank
      logic          we;
      logic [AW-1:0] wa;
      logic [7:0]    wd;
      always_comb begin
        if (cur == 1'(h)) begin
          we = hw_en && (hw_bank == b[$clog2(NB)-1:0]);
          wa = hw_addr;
          wd = hw_data;
        end else begin
          we = wr_en[b];
          wa = wr_addr[b];
          wd = wr_data[b];
        end
      end
      buffer_bank #(.DEPTH(DEPTH), .AW(AW)) u_bank (
        .clk    (clk),
        .rd_addr(rd_addr[b]),
        .rd_data(rd_h[h][b]),
        .wr_en  (we),
        .wr_addr(wa),
        .wr_data(wd)
      );
    end
  end

  assign rd_data = rd_h[cur_q];
endmodule
