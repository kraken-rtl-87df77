// apb_demux: APB address decoder of the SoC peripheral bus.
//
// The 4 KiB region paddr[15:12] = i selects slave i; only that slave sees
// psel. A region with no slave, or a slave whose power domain is off
// (slv_off_i), answers at once with pslverr, so the bus never hangs on a
// gated accelerator. The paper shows the APB bus; the region size and the
// error response are this design's.
module apb_demux
  import kraken_pkg::*;
#(
  parameter int unsigned N_SLV = 3
) (
  input  apb_req_t              mst_req_i,
  output apb_rsp_t              mst_rsp_o,
  output apb_req_t [N_SLV-1:0]  slv_req_o,
  input  apb_rsp_t [N_SLV-1:0]  slv_rsp_i,
  input  logic     [N_SLV-1:0]  slv_off_i
);
  logic [3:0] region;
  assign region = mst_req_i.paddr[15:12];

  always_comb begin
    mst_rsp_o = '{pready: 1'b1, pslverr: 1'b1, prdata: '0};
    for (int s = 0; s < N_SLV; s++) begin
      slv_req_o[s]       = mst_req_i;
      slv_req_o[s].psel  = mst_req_i.psel && (region == 4'(s)) && !slv_off_i[s];
      slv_req_o[s].paddr = {20'h0, mst_req_i.paddr[11:0]};
      if (region == 4'(s) && !slv_off_i[s]) mst_rsp_o = slv_rsp_i[s];
    end
  end
endmodule
