// buffer_bank: one bank of the data buffer, DEPTH bytes, one synchronous
// read port and one write port. Read data appear the cycle after rd_addr.
// The contents are not reset; a layer only reads what was written.
module buffer_bank #(
  parameter int DEPTH = 4096,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] rd_addr,
  output logic [7:0]    rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_data
);
  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
