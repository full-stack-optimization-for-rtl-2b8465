// input_reshaper: address mapping of the input reshaping operation.
//
// To use more of the array's input lanes in the first layer, an RGB image is
// cut into F x F pixel blocks (F = 1 << log2f, so F = 1, 2 or 4). Pixel
// (y, x) of colour c belongs to group g = (y mod F)*F + (x mod F) (groups
// numbered row by row inside a block) and moves to channel g*3 + c at
// position (y div F, x div F) of a map F times smaller in each direction:
// 3x224x224 becomes 12x112x112 for F = 2 and 48x56x56 for F = 4. The block
// is combinational; it sits on the image write path into the data buffer.
// The channel order (group-major, colour-minor) is this design's choice.
// img_w is the original image width.
module input_reshaper #(
  parameter int AW = 12
) (
  input  logic [1:0]    log2f,
  input  logic [8:0]    img_w,
  input  logic [1:0]    c,
  input  logic [7:0]    y,
  input  logic [7:0]    x,
  output logic [7:0]    ch,
  output logic [AW-1:0] pix
);
  logic [3:0] f_mask;
  logic [7:0] gy, gx, ny, nx;
  logic [8:0] nw;
  logic [7:0] grp;

  always_comb begin
    f_mask = 4'((1 << log2f) - 1);
    gy  = y & 8'(f_mask);
    gx  = x & 8'(f_mask);
    ny  = y >> log2f;
    nx  = x >> log2f;
    nw  = img_w >> log2f;
    grp = 8'((gy << log2f) + gx);
    ch  = 8'(grp * 3 + 8'(c));
    pix = AW'(ny * nw + nx);
  end
endmodule
