// tb_cutie_weight_decoder: packs random ternary weights five to a byte in
// base 3 (the 1.6 bit/weight format) and checks that the decoder returns
// every one of them, including the all -1 (byte 0) and all +1 (byte 242)
// corner codes.
module tb_cutie_weight_decoder
  import kraken_pkg::*;
;
  localparam int NB = 173;
  logic [8*NB-1:0] pk;
  trit_t [5*NB-1:0] tr;
  int checks = 0, failures = 0;
  int t [5*NB];

  cutie_weight_decoder #(.NBYTES(NB)) dut (.packed_i(pk), .trits_o(tr));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 20; it++) begin
      for (int i = 0; i < 5*NB; i++) begin
        t[i] = int'($urandom % 3) - 1;
        if (it == 0) t[i] = -1;
        if (it == 1) t[i] = 1;
      end
      for (int b = 0; b < NB; b++) begin
        int v;
        v = 0;
        for (int j = 4; j >= 0; j--) v = v * 3 + (t[5*b + j] + 1);
        pk[8*b +: 8] = 8'(v);
      end
      #1;
      for (int i = 0; i < 5*NB; i++) begin
        trit_t e;
        e = (t[i] == 1) ? TRIT_POS : (t[i] == -1) ? TRIT_NEG : TRIT_ZERO;
        checks++;
        if (tr[i] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL trit %0d got %b exp %b", i, tr[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
