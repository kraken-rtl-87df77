// rr_arbiter: round-robin arbiter.
//
// Grants one of N requesters per cycle, combinationally. The search starts
// at the requester after the last one granted (a pointer updated only when
// the grant is used, update_i), so every steady requester is served within
// N grants. Shared by the logarithmic interconnect and the SNE crossbar;
// the arbitration policy is this design's choice.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [N-1:0]         req_i,
  input  logic                 update_i,   // grant taken this cycle
  output logic [N-1:0]         gnt_o,      // one-hot
  output logic [$clog2(N)-1:0] idx_o,
  output logic                 valid_o
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr_q;

  logic [IW:0] j;   // candidate requester, ptr_q + k modulo N

  always_comb begin
    j       = '0;
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      j = {1'b0, ptr_q} + (IW+1)'(k);
      if (j >= (IW+1)'(N)) j = j - (IW+1)'(N);
      if (!valid_o && req_i[j[IW-1:0]]) begin
        valid_o  = 1'b1;
        gnt_o[j[IW-1:0]] = 1'b1;
        idx_o    = j[IW-1:0];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else if (update_i && valid_o) ptr_q <= IW'((int'(idx_o) + 1) % N);
  end
endmodule
