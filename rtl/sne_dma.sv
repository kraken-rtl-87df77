// sne_dma: the SNE streamers between L2 memory and the engines.
//
// Input streamer: after start_i it reads evt_count_i 32-bit words from
// src_addr_i upward, one outstanding read at a time, and offers each word's
// low 16 bits as a COO event on evt_*. Output streamer: every spike on spk_*
// is written as one 32-bit word to dst_addr_i + 4*n, n counting spikes since
// start; spike_count_o holds n. Spike writes take the memory port first, so
// the engines never wait on an event read.
// Memory port: TCDM style, gnt in the request cycle, read data in the next.
// The paper shows "DMAs" in SNE connected to the SoC interconnect; the word
// format, the single-port sharing and the priority are this design's choices.
module sne_dma
  import kraken_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  logic [31:0] src_addr_i,
  input  logic [31:0] evt_count_i,
  input  logic [31:0] dst_addr_i,
  output logic        busy_o,         // input stream not yet drained
  output logic [31:0] spike_count_o,
  // memory master
  output mem_req_t    mem_req_o,
  input  mem_rsp_t    mem_rsp_i,
  // events to the crossbar
  output logic        evt_valid_o,
  input  logic        evt_ready_i,
  output logic [15:0] evt_o,
  // spikes from the crossbar
  input  logic        spk_valid_i,
  output logic        spk_ready_o,
  input  logic [15:0] spk_i
);
  logic [31:0] rd_addr_q, rd_left_q, wr_addr_q;
  logic        rd_wait_q, rd_resp_q, buf_valid_q;
  logic [15:0] buf_q;
  logic        do_read;

  assign do_read = !spk_valid_i && (rd_left_q != 0) && !buf_valid_q && !rd_wait_q;

  always_comb begin
    mem_req_o = '0;
    if (spk_valid_i) begin
      mem_req_o.req   = 1'b1;
      mem_req_o.we    = 1'b1;
      mem_req_o.addr  = wr_addr_q;
      mem_req_o.wdata = {16'h0, spk_i};
      mem_req_o.be    = 4'hf;
    end else if (do_read) begin
      mem_req_o.req   = 1'b1;
      mem_req_o.addr  = rd_addr_q;
      mem_req_o.be    = 4'hf;
    end
  end

  assign spk_ready_o = spk_valid_i && mem_rsp_i.gnt;
  assign evt_valid_o = buf_valid_q;
  assign evt_o       = buf_q;
  assign busy_o      = (rd_left_q != 0) || rd_wait_q || buf_valid_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_addr_q <= '0; rd_left_q <= '0; wr_addr_q <= '0;
      rd_wait_q <= 1'b0; rd_resp_q <= 1'b0; buf_valid_q <= 1'b0; buf_q <= '0;
      spike_count_o <= '0;
    end else begin
      rd_resp_q <= do_read && mem_rsp_i.gnt;
      if (start_i) begin
        rd_addr_q     <= src_addr_i;
        rd_left_q     <= evt_count_i;
        wr_addr_q     <= dst_addr_i;
        spike_count_o <= '0;
      end else begin
        if (do_read && mem_rsp_i.gnt) begin
          rd_wait_q <= 1'b1;
          rd_addr_q <= rd_addr_q + 32'd4;
          rd_left_q <= rd_left_q - 1;
        end
        if (spk_ready_o) begin
          wr_addr_q     <= wr_addr_q + 32'd4;
          spike_count_o <= spike_count_o + 1;
        end
      end
      if (rd_resp_q) begin
        rd_wait_q   <= 1'b0;
        buf_valid_q <= 1'b1;
        buf_q       <= mem_rsp_i.rdata[15:0];
      end else if (evt_valid_o && evt_ready_i) begin
        buf_valid_q <= 1'b0;
      end
    end
  end
endmodule
