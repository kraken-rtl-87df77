// tb_cutie_ocu: one output channel unit with 16 input channels (144-trit
// window). Loads random kernels and normalisation parameters and checks the
// accumulator and the ternary output for many random windows against an
// integer reference, including the saturating cases of an all-matching and
// an all-opposite window, and the boundary y == thr (no firing); checks that weights stay latched when load is low.
module tb_cutie_ocu
  import kraken_pkg::*;
;
  localparam int C = 16, N = 9 * C;
  logic clk = 0;
  always #5 clk = ~clk;
  logic load;
  trit_t [N-1:0] w, win;
  logic signed [7:0] scale;
  logic signed [15:0] bias, acc;
  logic [15:0] thr;
  trit_t act;
  int checks = 0, failures = 0;
  int wi [N];

  cutie_ocu #(.C(C)) dut (.clk_i(clk), .load_i(load), .weights_i(w), .scale_i(scale),
    .bias_i(bias), .thr_i(thr), .window_i(win), .acc_o(acc), .act_o(act));

  function automatic trit_t enc(int v);
    return (v == 1) ? TRIT_POS : (v == -1) ? TRIT_NEG : TRIT_ZERO;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0;
    for (int l = 0; l < 6; l++) begin
      int sc, bi, th;
      for (int i = 0; i < N; i++) begin wi[i] = int'($urandom % 3) - 1; w[i] = enc(wi[i]); end
      sc = int'($urandom % 16) - 8; bi = int'($urandom % 200) - 100; th = $urandom % 60;
      if (l == 5) begin                         // boundary: y == thr exactly
        sc = 1; bi = 0; th = 0;
        for (int i = 0; i < N; i++) th += (wi[i] != 0);
      end
      scale = 8'(sc); bias = 16'(bi); thr = 16'(th);
      @(negedge clk) load = 1;
      @(negedge clk) load = 0;
      w = '0;                                   // must not matter any more
      for (int k = 0; k < 200; k++) begin
        int a, y, e, xv;
        a = 0;
        for (int i = 0; i < N; i++) begin
          xv = int'($urandom % 3) - 1;
          if (k == 0) xv = wi[i];
          if (k == 1) xv = -wi[i];
          win[i] = enc(xv);
          a += xv * wi[i];
        end
        #1;
        y = a * sc + bi;
        e = (y > th) ? 1 : (y < -th) ? -1 : 0;
        checks++;
        if (int'(acc) != a || act !== enc(e)) begin
          failures++;
          if (failures < 10) $display("FAIL acc %0d exp %0d act %b exp %0d", acc, a, act, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
