// sne: the Sparse Neural Engine, an event-driven accelerator for spiking
// convolutional networks with 4-bit 3x3 kernels and 8-bit LIF neurons.
//
// Input spikes are COO events fetched from L2 by the input streamer
// (sne_dma), broadcast by the crossbar to the eight engines, and turned by
// each engine into a burst of 72 synaptic operations over its own 8 KiB state
// memory (8 output channels x 32 x 32 neurons). Output spikes are merged by
// the crossbar and written back to L2 as COO events. Work, and so time and
// energy, scales with the number of input events: this is what makes SNE
// energy-proportional to the DVS activity.
//
// The 9 KiB weight buffer (2048 kernels of 9 x 4 bit, indexed {cout, cin})
// is one array with one read port per engine.
// Configuration: APB slave, always ready, registers at byte offsets
//   0x00 CTRL   W  bit0 start streaming, bit1 clear all neuron states
//   0x04 STATUS R  bit0 busy
//   0x08 SRC    RW event list address     0x0C COUNT RW number of events
//   0x10 DST    RW spike list address     0x14 SPIKES R spikes written
//   0x18 ALPHA  RW leak factor (/256)     0x1C THETA RW threshold (signed 8)
//   0x20 SOPS   R  synaptic operations done since reset
//   0x24 WADDR  RW kernel index           0x28 WLO   RW kernel bits 31:0
//   0x2C WHI    W  kernel bits 35:32, writes the kernel at WADDR
//   0x30 CYCLES R  cycles spent busy since the last start
//   0x34 EVTS   R  events consumed since the last start
// done_o pulses when SNE goes from busy to idle.
// The block structure (DMAs, crossbar, 8 engines, state memories, weight
// buffer, CFG) follows the paper's figure; the register map is this design's.
module sne
  import kraken_pkg::*;
#(
  parameter int unsigned N_ENG = SNE_N_ENGINES,
  parameter int unsigned XW    = SNE_XW,
  parameter int unsigned YW    = SNE_YW,
  parameter int unsigned LCHW  = SNE_LCHW,
  parameter int unsigned CINW  = SNE_CINW
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  apb_req_t apb_req_i,
  output apb_rsp_t apb_rsp_o,
  output mem_req_t mem_req_o,
  input  mem_rsp_t mem_rsp_i,
  output logic     busy_o,
  output logic     done_o
);
  localparam int unsigned COUTW = $clog2(N_ENG) + LCHW;
  localparam int unsigned NK    = 2**(COUTW + CINW);
  localparam int unsigned EW    = 16;

  // ---------------------------------------------------------------- config
  logic [31:0] src_q, cnt_q, dst_q, waddr_q, wlo_q, cycles_q, evts_q;
  logic [7:0]  alpha_q;
  logic signed [7:0] theta_q;
  logic        start, clear, busy_q;
  logic [35:0] wbuf [NK];

  logic        wr, rd;
  logic [7:0]  off;
  assign wr  = apb_req_i.psel && apb_req_i.penable && apb_req_i.pwrite;
  assign rd  = apb_req_i.psel && !apb_req_i.pwrite;
  assign off = apb_req_i.paddr[7:0];
  assign start = wr && off == 8'h00 && apb_req_i.pwdata[0];
  assign clear = wr && off == 8'h00 && apb_req_i.pwdata[1];

  // ---------------------------------------------------------------- datapath
  logic        dma_busy;
  logic [31:0] spikes;
  logic        evt_valid, evt_ready, spk_valid, spk_ready;
  logic [15:0] evt, spk;
  logic [N_ENG-1:0] eng_valid, eng_ready, eng_busy, o_valid, o_ready;
  logic [N_ENG-1:0][EW-1:0] o_evt;
  logic [N_ENG-1:0][31:0]   sops;
  logic [N_ENG-1:0][COUTW+CINW-1:0] w_addr;
  logic [31:0] sop_total;

  sne_dma u_dma (
    .clk_i, .rst_ni, .start_i(start), .src_addr_i(src_q), .evt_count_i(cnt_q),
    .dst_addr_i(dst_q), .busy_o(dma_busy), .spike_count_o(spikes),
    .mem_req_o, .mem_rsp_i,
    .evt_valid_o(evt_valid), .evt_ready_i(evt_ready), .evt_o(evt),
    .spk_valid_i(spk_valid), .spk_ready_o(spk_ready), .spk_i(spk)
  );

  sne_crossbar #(.N(N_ENG), .EW(EW)) u_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(evt_valid), .in_ready_o(evt_ready),
    .eng_valid_o(eng_valid), .eng_ready_i(eng_ready),
    .spk_valid_i(o_valid), .spk_ready_o(o_ready), .spk_evt_i(o_evt),
    .out_valid_o(spk_valid), .out_ready_i(spk_ready), .out_evt_o(spk)
  );

  for (genvar e = 0; e < N_ENG; e++) begin : g_eng
    logic [COUTW-1:0] och;
    logic [YW-1:0]    oy;
    logic [XW-1:0]    ox;
    sne_engine #(.ENGINE_ID(e), .XW(XW), .YW(YW), .LCHW(LCHW), .CINW(CINW), .COUTW(COUTW)) u_eng (
      .clk_i, .rst_ni, .clear_i(clear), .alpha_i(alpha_q), .theta_i(theta_q),
      .evt_valid_i(eng_valid[e]), .evt_ready_o(eng_ready[e]),
      .evt_cin_i(evt[XW+YW +: CINW]), .evt_y_i(evt[XW +: YW]), .evt_x_i(evt[XW-1:0]),
      .w_addr_o(w_addr[e]), .w_kernel_i(wbuf[w_addr[e]]),
      .out_valid_o(o_valid[e]), .out_ready_i(o_ready[e]),
      .out_ch_o(och), .out_y_o(oy), .out_x_o(ox),
      .busy_o(eng_busy[e]), .sop_count_o(sops[e])
    );
    assign o_evt[e] = EW'({och, oy, ox});
  end

  always_comb begin
    sop_total = '0;
    for (int e = 0; e < N_ENG; e++) sop_total += sops[e];
  end

  assign busy_o = dma_busy || (|eng_busy) || spk_valid;

  // ---------------------------------------------------------------- registers
  always_ff @(posedge clk_i) begin
    if (wr && off == 8'h2C) wbuf[waddr_q[COUTW+CINW-1:0]] <= {apb_req_i.pwdata[3:0], wlo_q};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q <= '0; cnt_q <= '0; dst_q <= '0; waddr_q <= '0; wlo_q <= '0;
      alpha_q <= 8'd255; theta_q <= 8'sd8; busy_q <= 1'b0; done_o <= 1'b0;
      cycles_q <= '0; evts_q <= '0;
    end else begin
      busy_q <= busy_o;
      done_o <= busy_q && !busy_o;
      if (start) begin
        cycles_q <= '0; evts_q <= '0;
      end else begin
        if (busy_o) cycles_q <= cycles_q + 1;
        if (evt_valid && evt_ready) evts_q <= evts_q + 1;
      end
      if (wr) unique case (off)
        8'h08: src_q   <= apb_req_i.pwdata;
        8'h0C: cnt_q   <= apb_req_i.pwdata;
        8'h10: dst_q   <= apb_req_i.pwdata;
        8'h18: alpha_q <= apb_req_i.pwdata[7:0];
        8'h1C: theta_q <= apb_req_i.pwdata[7:0];
        8'h24: waddr_q <= apb_req_i.pwdata;
        8'h28: wlo_q   <= apb_req_i.pwdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    apb_rsp_o = '{pready: 1'b1, pslverr: 1'b0, prdata: '0};
    if (rd) unique case (off)
      8'h04: apb_rsp_o.prdata = {31'h0, busy_o};
      8'h08: apb_rsp_o.prdata = src_q;
      8'h0C: apb_rsp_o.prdata = cnt_q;
      8'h10: apb_rsp_o.prdata = dst_q;
      8'h14: apb_rsp_o.prdata = spikes;
      8'h18: apb_rsp_o.prdata = {24'h0, alpha_q};
      8'h1C: apb_rsp_o.prdata = {{24{theta_q[7]}}, theta_q};
      8'h20: apb_rsp_o.prdata = sop_total;
      8'h24: apb_rsp_o.prdata = waddr_q;
      8'h28: apb_rsp_o.prdata = wlo_q;
      8'h30: apb_rsp_o.prdata = cycles_q;
      8'h34: apb_rsp_o.prdata = evts_q;
      default: ;
    endcase
  end
endmodule
