// tb_sne_lif_unit: exhaustive-style random test of one LIF synaptic
// operation against an integer reference (floor of v*alpha/256, add the
// weight, saturate to 8 bit, fire at >= theta, reset to zero).
module tb_sne_lif_unit;
  logic signed [7:0] v, theta, v_o;
  logic signed [3:0] w;
  logic [7:0] alpha;
  logic spike;
  int checks = 0, failures = 0;

  sne_lif_unit dut (.v_i(v), .w_i(w), .alpha_i(alpha), .theta_i(theta), .v_o(v_o), .spike_o(spike));

  function automatic void ref_sop(input int vv, ww, aa, th, output int nv, output bit sp);
    int p, lk, s;
    p  = vv * aa;
    lk = (p >= 0) ? p / 256 : -((-p + 255) / 256);   // floor division
    s  = lk + ww;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    sp = (s >= th);
    nv = sp ? 0 : s;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nv; bit sp;
    for (int i = 0; i < 4000; i++) begin
      v = 8'($urandom); w = 4'($urandom); alpha = 8'($urandom); theta = 8'($urandom);
      if (i < 16) alpha = 8'd0;          // full leak corner
      if (i >= 16 && i < 32) begin v = 8'sd127; w = 4'sd7; alpha = 8'd255; end
      #1;
      ref_sop(int'(v), int'(w), int'(alpha), int'(theta), nv, sp);
      checks++;
      if (int'(v_o) != nv || spike != sp) begin
        failures++;
        if (failures < 10) $display("MISMATCH v=%0d w=%0d a=%0d th=%0d: got %0d/%0b exp %0d/%0b",
                                    v, w, alpha, theta, v_o, spike, nv, sp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
