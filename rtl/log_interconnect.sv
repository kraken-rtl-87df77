// log_interconnect: single-cycle crossbar from N_MST masters to N_BANK
// word-interleaved memory banks (the "logarithmic interconnect" of PULP
// systems).
//
// Consecutive 32-bit words go to consecutive banks: bank = addr[2 +: BW],
// word in bank = addr[2+BW +: BANK_AW]. Each bank has its own round-robin
// arbiter, so masters that hit different banks are all granted in the same
// cycle; masters that collide on a bank are served one per cycle, the
// losers see gnt low and keep requesting (a bank conflict stall).
// Grant is combinational in the request cycle; rvalid/rdata return one
// cycle later for reads and writes alike.
// The paper names the interconnect and states that the L2 has 8 interleaved
// banks; word interleaving and round-robin arbitration are this design's.
module log_interconnect
  import kraken_pkg::*;
#(
  parameter int unsigned N_MST   = 4,
  parameter int unsigned N_BANK  = 8,
  parameter int unsigned BANK_AW = 15
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  mem_req_t [N_MST-1:0]    mst_req_i,
  output mem_rsp_t [N_MST-1:0]    mst_rsp_o,
  // bank side
  output logic [N_BANK-1:0]              bank_req_o,
  output logic [N_BANK-1:0]              bank_we_o,
  output logic [N_BANK-1:0][BANK_AW-1:0] bank_addr_o,
  output logic [N_BANK-1:0][31:0]        bank_wdata_o,
  output logic [N_BANK-1:0][3:0]         bank_be_o,
  input  logic [N_BANK-1:0][31:0]        bank_rdata_i,
  output logic [31:0]                    conflicts_o   // cycles a request lost arbitration
);
  localparam int unsigned BW = (N_BANK > 1) ? $clog2(N_BANK) : 1;
  localparam int unsigned MW = (N_MST > 1) ? $clog2(N_MST) : 1;

  logic [N_MST-1:0][BW-1:0] sel;
  logic [N_BANK-1:0][N_MST-1:0] bank_reqs, bank_gnt;
  logic [N_BANK-1:0][MW-1:0] bank_idx;
  logic [N_BANK-1:0] bank_any;
  logic [N_MST-1:0] gnt;
  logic [N_MST-1:0] rvalid_q;
  logic [N_MST-1:0][BW-1:0] rbank_q;

  always_comb begin
    for (int m = 0; m < N_MST; m++) sel[m] = mst_req_i[m].addr[2 +: BW];
    for (int b = 0; b < N_BANK; b++)
      for (int m = 0; m < N_MST; m++)
        bank_reqs[b][m] = mst_req_i[m].req && (sel[m] == BW'(b));
  end

  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    logic [$clog2(N_MST > 1 ? N_MST : 2)-1:0] idx;
    rr_arbiter #(.N(N_MST)) u_arb (
      .clk_i, .rst_ni, .req_i(bank_reqs[b]), .update_i(1'b1),
      .gnt_o(bank_gnt[b]), .idx_o(idx), .valid_o(bank_any[b])
    );
    assign bank_idx[b]     = MW'(idx);
    assign bank_req_o[b]   = bank_any[b];
    assign bank_we_o[b]    = mst_req_i[bank_idx[b]].we;
    assign bank_addr_o[b]  = mst_req_i[bank_idx[b]].addr[2+BW +: BANK_AW];
    assign bank_wdata_o[b] = mst_req_i[bank_idx[b]].wdata;
    assign bank_be_o[b]    = mst_req_i[bank_idx[b]].be;
  end

  always_comb begin
    gnt = '0;
    for (int b = 0; b < N_BANK; b++) gnt |= bank_gnt[b];
    for (int m = 0; m < N_MST; m++) begin
      mst_rsp_o[m].gnt    = gnt[m];
      mst_rsp_o[m].rvalid = rvalid_q[m];
      mst_rsp_o[m].rdata  = bank_rdata_i[rbank_q[m]];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q    <= '0;
      rbank_q     <= '0;
      conflicts_o <= '0;
    end else begin
      rvalid_q <= gnt;
      for (int m = 0; m < N_MST; m++) if (gnt[m]) rbank_q[m] <= sel[m];
      if (|({N_MST{1'b1}} & ~gnt & req_vec())) conflicts_o <= conflicts_o + 1;
    end
  end

  function automatic logic [N_MST-1:0] req_vec();
    logic [N_MST-1:0] r;
    for (int m = 0; m < N_MST; m++) r[m] = mst_req_i[m].req;
    return r;
  endfunction

  // at most one master wins a bank in a cycle
  for (genvar b = 0; b < N_BANK; b++) begin : g_chk
    a_onehot: assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(bank_gnt[b]));
  end
endmodule
