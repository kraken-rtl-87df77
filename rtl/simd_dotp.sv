// simd_dotp: mixed-precision SIMD widening dot-product unit of a cluster
// core.
//
// res = acc + sum_k a[k] * b[k] over signed packed elements of 8, 4 or 2
// bits, accumulated at 32 bit. The element widths of the two operands are
// not encoded in the instruction but held in a status register (mode), set
// beforehand with csr_we_i: {sel[2:0], prec_b[1:0], prec_a[1:0]}, with
// prec 0 = 8 bit, 1 = 4 bit, 2 = 2 bit. When both widths are equal, the
// 32-bit operands hold 4, 8 or 16 elements. When they differ (mixed
// precision), the number of products is set by the wider operand, n =
// 32 / wider bits, and the narrower operand supplies chunk `sel` of n of its
// elements, so one narrow word feeds several instructions.
// The datapath result is combinational; the status register is updated on
// the clock edge.
// The paper names int8/int4/int2 SIMD widening dot products, all mixed
// combinations and a status-based ISA extension; the register layout, the
// chunk selection and the signed-only arithmetic are this design's choices.
module simd_dotp (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        csr_we_i,
  input  logic [6:0]  csr_wdata_i,
  output logic [6:0]  mode_o,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  input  logic [31:0] acc_i,
  output logic [31:0] res_o
);
  logic [6:0] mode_q;
  assign mode_o = mode_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)       mode_q <= '0;
    else if (csr_we_i) mode_q <= csr_wdata_i;
  end

  function automatic int unsigned bits_of(logic [1:0] p);
    return (p == 2'd0) ? 8 : (p == 2'd1) ? 4 : 2;
  endfunction

  function automatic logic signed [7:0] elem(logic [31:0] w, int unsigned bits, int unsigned idx);
    logic [7:0] raw;
    raw = 8'(w >> (idx * bits));
    unique case (bits)
      8:       return $signed(raw);
      4:       return 8'($signed(raw[3:0]));
      default: return 8'($signed(raw[1:0]));
    endcase
  endfunction

  always_comb begin
    int unsigned ba, bb, wide, n, off_a, off_b;
    logic signed [31:0] sum;
    ba   = bits_of(mode_q[1:0]);
    bb   = bits_of(mode_q[3:2]);
    wide = (ba > bb) ? ba : bb;
    n    = 32 / wide;
    off_a = (ba < wide) ? 32'(mode_q[6:4]) * n % (32 / ba) : 0;
    off_b = (bb < wide) ? 32'(mode_q[6:4]) * n % (32 / bb) : 0;
    sum  = $signed(acc_i);
    for (int unsigned k = 0; k < 16; k++)
      if (k < n)
        sum += 32'(elem(a_i, ba, off_a + k)) * 32'(elem(b_i, bb, off_b + k));
    res_o = sum;
  end
endmodule
