// tb_cutie_window: feeds random 3-channel feature maps of several sizes
// through the line buffers in padded raster order (xi = 0..W, yi = 0..H,
// zero pixels in the padding row and column) and checks every 3x3 window
// the window emits against the map with zero padding around it.
module tb_cutie_window
  import kraken_pkg::*;
;
  localparam int C = 3, MAX_W = 12, XW = $clog2(MAX_W + 1);
  logic clk = 0;
  always #5 clk = ~clk;
  logic shift, mid_ok, top_ok;
  logic [XW-1:0] xi;
  trit_t [C-1:0] pix;
  trit_t [9*C-1:0] win;
  int checks = 0, failures = 0;
  trit_t img [16][16][C];

  cutie_window #(.C(C), .MAX_W(MAX_W)) dut (.clk_i(clk), .shift_i(shift), .xi_i(xi),
    .mid_ok_i(mid_ok), .top_ok_i(top_ok), .pix_i(pix), .window_o(win));

  function automatic trit_t px(int y, int x, int c, int w, int h);
    if (y < 0 || x < 0 || y >= h || x >= w) return TRIT_ZERO;
    return img[y][x][c];
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sizes [4][2] = '{'{4, 3}, '{12, 5}, '{1, 1}, '{7, 9}};
    shift = 0; xi = '0; mid_ok = 0; top_ok = 0; pix = '0;
    foreach (sizes[s]) begin
      int W, H;
      W = sizes[s][0]; H = sizes[s][1];
      foreach (img[y, x, c]) img[y][x][c] = trit_t'($urandom % 3 == 0 ? 2'b00 : ($urandom % 2 ? 2'b01 : 2'b11));
      for (int yi = 0; yi <= H; yi++)
        for (int xi_ = 0; xi_ <= W; xi_++) begin
          @(negedge clk);
          shift = 1; xi = XW'(xi_); mid_ok = (yi >= 1); top_ok = (yi >= 2);
          for (int c = 0; c < C; c++) pix[c] = (xi_ < W && yi < H) ? img[yi][xi_][c] : TRIT_ZERO;
          @(negedge clk);
          shift = 0;
          if (xi_ >= 1 && yi >= 1) begin
            int x0, y0;
            x0 = xi_ - 1; y0 = yi - 1;
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                for (int c = 0; c < C; c++) begin
                  checks++;
                  if (win[(ky*3+kx)*C + c] !== px(y0+ky-1, x0+kx-1, c, W, H)) begin
                    failures++;
                    if (failures < 10) $display("FAIL size %0dx%0d at (%0d,%0d) tap %0d%0d ch %0d", W, H, x0, y0, ky, kx, c);
                  end
                end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
