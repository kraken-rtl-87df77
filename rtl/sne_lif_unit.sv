// sne_lif_unit: one synaptic operation (SOP) on a leaky integrate-and-fire
// neuron, purely combinational.
//
// The paper counts one SOP as one 4-bit add, one 8-bit multiply and one 8-bit
// compare, on 8-bit neuron states and 4-bit weights; this unit is exactly
// that datapath:
//   leak    : v_leak = (v * alpha) >>> 8       (8-bit multiply, alpha/256 decay)
//   integrate: v_int = sat8(v_leak + w)         (signed 4-bit weight added)
//   fire    : spike = (v_int >= theta)          (8-bit compare)
//   reset   : v_new = spike ? 0 : v_int
// The order of the three steps, the decay scaling by 1/256, saturation and
// reset-to-zero are this design's choices; the paper does not give them.
module sne_lif_unit (
  input  logic signed [7:0] v_i,      // current membrane state
  input  logic signed [3:0] w_i,      // synaptic weight
  input  logic        [7:0] alpha_i,  // leak factor, v is scaled by alpha/256
  input  logic signed [7:0] theta_i,  // firing threshold
  output logic signed [7:0] v_o,      // state to write back
  output logic              spike_o
);
  logic signed [16:0] prod;
  logic signed [8:0]  v_leak;
  logic signed [9:0]  v_sum;
  logic signed [7:0]  v_int;

  always_comb begin
    prod    = v_i * $signed({1'b0, alpha_i});
    v_leak  = 9'(prod >>> 8);
    v_sum   = 10'(v_leak) + 10'(w_i);
    if (v_sum > 10'sd127)       v_int = 8'sd127;
    else if (v_sum < -10'sd128) v_int = -8'sd128;
    else                        v_int = v_sum[7:0];
    spike_o = (v_int >= theta_i);
    v_o     = spike_o ? 8'sd0 : v_int;
  end
endmodule
