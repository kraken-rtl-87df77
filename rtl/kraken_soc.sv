// kraken_soc: top level of the Kraken visual-processing SoC.
//
// An always-on SoC domain holds the 1 MiB L2 (8 interleaved banks behind a
// logarithmic interconnect), the APB peripheral bus and the power
// controller. Three switchable domains hang off it: the Sparse Neural
// Engine (SNE, spiking CNNs on DVS events), CUTIE (ternary CNNs on frames)
// and the 8-core cluster with its 128 KiB L1. The power controller closes a
// domain's power switch, enables its clock gate and releases its reset;
// a domain that is off answers APB accesses with an error.
// L2 master ports: 0 fabric controller, 1 uDMA (sensor interfaces), 2 SNE
// streamers, 3 cluster. APB regions: 0x0xxx power controller, 0x1xxx SNE,
// 0x2xxx CUTIE.
// Not included, and so brought out as ports: the fabric controller core
// (its APB master and L2 port), the uDMA and its peripherals (their L2
// port), the cluster cores (their L1 ports and dot-product operands) and the
// analog power switches (their enables).
// All domains run from one clock here, each through its own clock gate; the
// silicon has a separate clock per domain and clock-domain crossings, which
// this RTL does not model.
module kraken_soc
  import kraken_pkg::*;
#(
  parameter int unsigned N_CORES = 8
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // fabric controller
  input  apb_req_t                  fc_apb_req_i,
  output apb_rsp_t                  fc_apb_rsp_o,
  input  mem_req_t                  fc_mem_req_i,
  output mem_rsp_t                  fc_mem_rsp_o,
  // uDMA
  input  mem_req_t                  udma_mem_req_i,
  output mem_rsp_t                  udma_mem_rsp_o,
  // cluster side of L2
  input  mem_req_t                  cl_l2_req_i,
  output mem_rsp_t                  cl_l2_rsp_o,
  // cluster cores
  input  mem_req_t [N_CORES-1:0]    core_req_i,
  output mem_rsp_t [N_CORES-1:0]    core_rsp_o,
  input  logic [N_CORES-1:0]        dotp_csr_we_i,
  input  logic [N_CORES-1:0][6:0]   dotp_csr_i,
  input  logic [N_CORES-1:0][31:0]  dotp_a_i,
  input  logic [N_CORES-1:0][31:0]  dotp_b_i,
  input  logic [N_CORES-1:0][31:0]  dotp_acc_i,
  output logic [N_CORES-1:0][31:0]  dotp_res_o,
  // power switches of SNE, CUTIE, cluster
  output logic [2:0]                pwr_en_o,
  // events to the fabric controller
  output logic                      sne_done_o,
  output logic                      cutie_done_o,
  output logic [31:0]               l2_conflicts_o,
  output logic [31:0]               l1_conflicts_o
);
  localparam int unsigned D_SNE = 0, D_CUTIE = 1, D_CLUSTER = 2;

  apb_req_t [2:0] apb_req;
  apb_rsp_t [2:0] apb_rsp;
  logic [2:0] clk_en, dom_rst_n, dom_on, dom_clk;
  mem_req_t [3:0] l2_req;
  mem_rsp_t [3:0] l2_rsp;
  logic sne_busy, cutie_busy;

  apb_demux #(.N_SLV(3)) u_apb (
    .mst_req_i(fc_apb_req_i), .mst_rsp_o(fc_apb_rsp_o),
    .slv_req_o(apb_req), .slv_rsp_i(apb_rsp),
    .slv_off_i({~dom_on[D_CUTIE], ~dom_on[D_SNE], 1'b0})
  );

  pwr_ctrl #(.N_DOM(3)) u_pmu (
    .clk_i, .rst_ni, .apb_req_i(apb_req[0]), .apb_rsp_o(apb_rsp[0]),
    .pwr_en_o, .clk_en_o(clk_en), .rst_no(dom_rst_n), .on_o(dom_on)
  );

  for (genvar d = 0; d < 3; d++) begin : g_cg
    clock_gate u_cg (.clk_i, .en_i(clk_en[d]), .test_en_i(1'b0), .clk_o(dom_clk[d]));
  end

  assign l2_req[0]      = fc_mem_req_i;
  assign l2_req[1]      = udma_mem_req_i;
  assign l2_req[3]      = cl_l2_req_i;
  assign fc_mem_rsp_o   = l2_rsp[0];
  assign udma_mem_rsp_o = l2_rsp[1];
  assign cl_l2_rsp_o    = l2_rsp[3];

  interleaved_memory #(.N_MST(4), .N_BANK(8), .SIZE_BYTES(1024 * 1024)) u_l2 (
    .clk_i, .rst_ni, .mst_req_i(l2_req), .mst_rsp_o(l2_rsp), .conflicts_o(l2_conflicts_o)
  );

  sne u_sne (
    .clk_i(dom_clk[D_SNE]), .rst_ni(rst_ni && dom_rst_n[D_SNE]),
    .apb_req_i(apb_req[1]), .apb_rsp_o(apb_rsp[1]),
    .mem_req_o(l2_req[2]), .mem_rsp_i(l2_rsp[2]),
    .busy_o(sne_busy), .done_o(sne_done_o)
  );

  cutie u_cutie (
    .clk_i(dom_clk[D_CUTIE]), .rst_ni(rst_ni && dom_rst_n[D_CUTIE]),
    .apb_req_i(apb_req[2]), .apb_rsp_o(apb_rsp[2]),
    .busy_o(cutie_busy), .done_o(cutie_done_o)
  );

  pulp_cluster #(.N_CORES(N_CORES)) u_cluster (
    .clk_i(dom_clk[D_CLUSTER]), .rst_ni(rst_ni && dom_rst_n[D_CLUSTER]),
    .core_req_i, .core_rsp_o, .dotp_csr_we_i, .dotp_csr_i,
    .dotp_a_i, .dotp_b_i, .dotp_acc_i, .dotp_res_o, .l1_conflicts_o
  );
endmodule
