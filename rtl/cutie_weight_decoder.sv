// cutie_weight_decoder: expands compressed ternary weights.
//
// CUTIE keeps its ternary weights on chip at 1.6 bit per weight: five
// ternary values t0..t4 in {-1,0,+1} share one byte whose value is
//   b = (t0+1) + 3(t1+1) + 9(t2+1) + 27(t3+1) + 81(t4+1),  0 <= b <= 242
// (3^5 = 243 codes fit in 256). This module decodes NBYTES such bytes into
// 5*NBYTES trits, purely combinationally, by repeated division by three.
// Byte codes 243..255 are unused; they decode like b mod 243 would not be
// guaranteed, so an encoder must never produce them.
// The 1.6 bit figure is the paper's; the digit order within the byte and the
// trit encoding (00 = 0, 01 = +1, 11 = -1) are this design's choices.
module cutie_weight_decoder
  import kraken_pkg::*;
#(
  parameter int unsigned NBYTES = 173
) (
  input  logic [8*NBYTES-1:0]    packed_i,
  output trit_t [5*NBYTES-1:0]   trits_o
);
  function automatic trit_t digit_to_trit(logic [1:0] d);
    return (d == 2'd0) ? TRIT_NEG : (d == 2'd1) ? TRIT_ZERO : TRIT_POS;
  endfunction

  always_comb begin
    for (int i = 0; i < NBYTES; i++) begin
      logic [7:0] v;
      v = packed_i[8*i +: 8];
      for (int j = 0; j < 5; j++) begin
        trits_o[5*i + j] = digit_to_trit(2'(v % 8'd3));
        v = v / 8'd3;
      end
    end
  end
endmodule
