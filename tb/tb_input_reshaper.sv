// tb_input_reshaper: for F = 1, 2 and 4 and a 16 x 16 image, walks over
// every F x F block and every position inside it, computing the expected
// channel and pixel from the block structure (group counter running row by
// row inside the block), and compares with the mapper. It also checks that
// the mapping is one-to-one: every (channel, pixel) is hit exactly once.
module tb_input_reshaper;
  localparam int AW = 12, IW = 16;
  logic [1:0] log2f; logic [8:0] img_w; logic [1:0] c; logic [7:0] y, x, ch; logic [AW-1:0] pix;
  input_reshaper #(.AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  int hit [48][256];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    img_w = 9'(IW);
    for (int lf = 0; lf < 3; lf++) begin
      int F, NW;
      F = 1 << lf; NW = IW / F;
      log2f = 2'(lf);
      for (int a = 0; a < 48; a++) for (int p = 0; p < 256; p++) hit[a][p] = 0;
      for (int by = 0; by < NW; by++) for (int bx = 0; bx < NW; bx++) begin
        int g;
        g = 0;
        for (int oy = 0; oy < F; oy++) for (int ox = 0; ox < F; ox++) begin
          for (int cc = 0; cc < 3; cc++) begin
            y = 8'(by*F + oy); x = 8'(bx*F + ox); c = 2'(cc);
            #1;
            checks++;
            if (int'(ch) != g*3 + cc || int'(pix) != by*NW + bx) begin
              failures++;
              if (failures < 10) $display("FAIL F=%0d y=%0d x=%0d c=%0d: ch %0d pix %0d", F, y, x, cc, ch, pix);
            end
            hit[ch][pix]++;
          end
          g++;
        end
      end
      for (int a = 0; a < 3*F*F; a++) for (int p = 0; p < NW*NW; p++) begin
        checks++;
        if (hit[a][p] != 1) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
