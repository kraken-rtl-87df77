// cutie_ocu: one CUTIE output channel compute unit (OCU).
//
// Holds the 3x3xC ternary kernel of its output channel in registers (loaded
// once per layer with load_i) and, every cycle, multiplies it with the full
// 3x3xC ternary input window, completely unrolled: 9*C ternary products
// summed into a signed accumulator. The accumulator is then normalised per
// channel, y = acc * scale + bias, and thresholded into a ternary
// activation: +1 if y > thr, -1 if y < -thr, 0 otherwise (the threshold is
// the non-linearity). Combinational from window_i to act_o, so one output
// activation per cycle per channel.
// The unrolled ternary MACs, the multi-bit accumulation and "normalization,
// non-linearity and thresholding" are the paper's; the affine form of the
// normalisation, the symmetric threshold and the field widths are this
// design's choices.
module cutie_ocu
  import kraken_pkg::*;
#(
  parameter int unsigned C = CUTIE_N_OCU,    // input channels
  parameter int unsigned N = 9 * C           // window size in trits
) (
  input  logic                clk_i,
  input  logic                load_i,        // capture weights and norm params
  input  trit_t [N-1:0]       weights_i,
  input  logic signed [7:0]   scale_i,
  input  logic signed [15:0]  bias_i,
  input  logic        [15:0]  thr_i,
  input  trit_t [N-1:0]       window_i,
  output logic signed [15:0]  acc_o,
  output trit_t               act_o
);
  trit_t [N-1:0]      w_q;
  logic signed [7:0]  scale_q;
  logic signed [15:0] bias_q;
  logic signed [16:0] thr_q;
  logic signed [31:0] y;

  always_ff @(posedge clk_i) begin
    if (load_i) begin
      w_q     <= weights_i;
      scale_q <= scale_i;
      bias_q  <= bias_i;
      thr_q   <= $signed({1'b0, thr_i});
    end
  end

  always_comb begin
    acc_o = '0;
    for (int i = 0; i < N; i++)
      acc_o += 16'(trit_val(trit_mul(w_q[i], window_i[i])));
    y = 32'(acc_o) * 32'(scale_q) + 32'(bias_q);
    if (y > 32'(thr_q))       act_o = TRIT_POS;
    else if (y < -32'(thr_q)) act_o = TRIT_NEG;
    else                      act_o = TRIT_ZERO;
  end
endmodule
