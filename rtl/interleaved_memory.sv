// interleaved_memory: a word-interleaved multi-bank scratchpad, the
// logarithmic interconnect with its banks behind it.
//
// Defaults give the Kraken L2: 1 MiB in 8 banks of 128 KiB, here with 4
// master ports (fabric controller, uDMA, SNE streamers, cluster/CUTIE side;
// the port count is this design's choice). With N_MST = 8, N_BANK = 16 and
// SIZE_BYTES = 128 KiB the same module is the cluster's shared L1.
// Protocol per master port: gnt in the request cycle (low while another
// master holds the same bank), rvalid/rdata one cycle later.
module interleaved_memory
  import kraken_pkg::*;
#(
  parameter int unsigned N_MST      = 4,
  parameter int unsigned N_BANK     = 8,
  parameter int unsigned SIZE_BYTES = 1024 * 1024
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  mem_req_t [N_MST-1:0] mst_req_i,
  output mem_rsp_t [N_MST-1:0] mst_rsp_o,
  output logic [31:0]          conflicts_o
);
  localparam int unsigned WORDS   = SIZE_BYTES / 4 / N_BANK;
  localparam int unsigned BANK_AW = $clog2(WORDS);

  logic [N_BANK-1:0]              req, we;
  logic [N_BANK-1:0][BANK_AW-1:0] addr;
  logic [N_BANK-1:0][31:0]        wdata, rdata;
  logic [N_BANK-1:0][3:0]         be;

  log_interconnect #(.N_MST(N_MST), .N_BANK(N_BANK), .BANK_AW(BANK_AW)) u_xbar (
    .clk_i, .rst_ni, .mst_req_i, .mst_rsp_o,
    .bank_req_o(req), .bank_we_o(we), .bank_addr_o(addr), .bank_wdata_o(wdata),
    .bank_be_o(be), .bank_rdata_i(rdata), .conflicts_o
  );

  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    sram_bank #(.WORDS(WORDS)) u_bank (
      .clk_i, .req_i(req[b]), .we_i(we[b]), .addr_i(addr[b]),
      .wdata_i(wdata[b]), .be_i(be[b]), .rdata_o(rdata[b])
    );
  end
endmodule
