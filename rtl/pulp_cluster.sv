// pulp_cluster: the parallel cluster's memory side and DSP datapaths.
//
// Eight cores share a 128 KiB L1 scratchpad with single-cycle access: the
// L1 is an interleaved_memory with one port per core and 16 word-interleaved
// banks (banking factor 2), so cores that touch different banks proceed in
// the same cycle and only same-bank collisions stall. Each core's mixed-
// precision SIMD dot-product unit (simd_dotp) is instantiated here as well.
// The RISC-V cores themselves are not part of this RTL: their L1 ports and
// the operand/result ports of their dot-product units are this module's
// ports, to be driven by core models or by a testbench.
// From the paper: 8 cores, 128 KiB shared single-cycle L1, SIMD int8/4/2
// mixed-precision dot products. This design's: the bank count and the
// interleaving.
module pulp_cluster
  import kraken_pkg::*;
#(
  parameter int unsigned N_CORES  = 8,
  parameter int unsigned N_BANK   = 16,
  parameter int unsigned L1_BYTES = 128 * 1024
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  mem_req_t [N_CORES-1:0]    core_req_i,
  output mem_rsp_t [N_CORES-1:0]    core_rsp_o,
  input  logic [N_CORES-1:0]        dotp_csr_we_i,
  input  logic [N_CORES-1:0][6:0]   dotp_csr_i,
  input  logic [N_CORES-1:0][31:0]  dotp_a_i,
  input  logic [N_CORES-1:0][31:0]  dotp_b_i,
  input  logic [N_CORES-1:0][31:0]  dotp_acc_i,
  output logic [N_CORES-1:0][31:0]  dotp_res_o,
  output logic [31:0]               l1_conflicts_o
);
  interleaved_memory #(.N_MST(N_CORES), .N_BANK(N_BANK), .SIZE_BYTES(L1_BYTES)) u_l1 (
    .clk_i, .rst_ni, .mst_req_i(core_req_i), .mst_rsp_o(core_rsp_o),
    .conflicts_o(l1_conflicts_o)
  );

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    logic [6:0] mode;
    simd_dotp u_dotp (
      .clk_i, .rst_ni, .csr_we_i(dotp_csr_we_i[c]), .csr_wdata_i(dotp_csr_i[c]),
      .mode_o(mode), .a_i(dotp_a_i[c]), .b_i(dotp_b_i[c]), .acc_i(dotp_acc_i[c]),
      .res_o(dotp_res_o[c])
    );
  end
endmodule
