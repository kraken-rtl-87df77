// cutie_window: line buffers and 3x3 sliding window for CUTIE.
//
// The controller walks a padded raster (xi = 0..W, yi = 0..H) and, on each
// shift_i, presents the input pixel (xi, yi) (all C channels, zero for the
// padding column xi = W and row yi = H). The module keeps the two previous
// rows in line buffers of MAX_W+1 entries and shifts the new column
// {row yi-2, row yi-1, row yi} into a 3x3 register window. After the shift
// for (xi, yi) the window holds the 3x3 neighbourhood centred on
// (xi-1, yi-1), with zeros outside the map: the left border comes from the
// zero column of the previous row, the top border from masking rows that do
// not exist yet (mid_ok_i, top_ok_i). So one full window per cycle is
// available while each input pixel is read only once.
// Window order: window_o[(ky*3 + kx)*C + c], ky/kx = 0 for the top/left tap.
// The paper states the throughput (one output per cycle per channel); this
// line-buffer structure is this design's way of reaching it.
module cutie_window
  import kraken_pkg::*;
#(
  parameter int unsigned C     = CUTIE_N_OCU,
  parameter int unsigned MAX_W = 64,
  parameter int unsigned XW    = $clog2(MAX_W + 1)
) (
  input  logic             clk_i,
  input  logic             shift_i,
  input  logic [XW-1:0]    xi_i,
  input  logic             mid_ok_i,   // yi >= 1
  input  logic             top_ok_i,   // yi >= 2
  input  trit_t [C-1:0]    pix_i,
  output trit_t [9*C-1:0]  window_o
);
  trit_t [C-1:0] lb_a [MAX_W+1];   // row yi-1
  trit_t [C-1:0] lb_b [MAX_W+1];   // row yi-2
  trit_t [2:0][2:0][C-1:0] win_q;  // [ky][kx]
  trit_t [C-1:0] top, mid;

  assign top = top_ok_i ? lb_b[xi_i] : '0;
  assign mid = mid_ok_i ? lb_a[xi_i] : '0;

  always_ff @(posedge clk_i) begin
    if (shift_i) begin
      lb_b[xi_i] <= lb_a[xi_i];
      lb_a[xi_i] <= pix_i;
      for (int ky = 0; ky < 3; ky++) begin
        win_q[ky][0] <= win_q[ky][1];
        win_q[ky][1] <= win_q[ky][2];
      end
      win_q[0][2] <= top;
      win_q[1][2] <= mid;
      win_q[2][2] <= pix_i;
    end
  end

  always_comb
    for (int ky = 0; ky < 3; ky++)
      for (int kx = 0; kx < 3; kx++)
        window_o[(ky*3 + kx)*C +: C] = win_q[ky][kx];
endmodule
