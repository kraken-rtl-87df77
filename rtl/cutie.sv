// cutie: the Completely Unrolled Ternary Inference Engine.
//
// A ternary convolution layer (3x3 kernels, C = N_OCU input and output
// channels, "same" padding) is computed with all multiplications of one
// output pixel spatially unrolled: N_OCU output channel compute units
// (cutie_ocu) each see the full 3x3xC input window in the same cycle and
// produce one ternary activation per cycle. A layer runs in two phases:
//   1. weight load, N_OCU+1 cycles: the compressed kernel of every OCU is
//      read from the weight memory (1.6 bit per weight), decoded and latched
//      into the OCU together with its normalisation parameters;
//   2. streaming, (W+1)*(H+1) + 3 cycles: the input feature map is read in
//      raster order from the activation memory, cutie_window forms one 3x3
//      window per cycle, and the output pixel (all N_OCU channels) is
//      written back to the activation memory at out_base + y*W + x.
// The activation memory holds one pixel (N_OCU trits, 2 bits each) per word;
// layers ping-pong between regions of it chosen by the host.
// Memories (defaults): activations ADEPTH = 6583 words x 192 bit = 158 kB,
// weights WDEPTH = 676 words x 173 byte = 117 kB, one word per
// (layer, output channel), so up to 7 layers of 96 channels are resident.
// Host port (APB, always ready), byte offsets:
//   0x00 CTRL W bit0 start layer          0x04 STATUS R bit0 busy
//   0x08 LAYER  0x0C WIDTH  0x10 HEIGHT   0x14 IN_BASE  0x18 OUT_BASE (RW)
//   0x1C CYCLES R cycles of the last layer
//   0x40 STAGE_IDX RW   0x44 STAGE_DATA RW (write advances STAGE_IDX)
//   0x48 WMEM_WR  W write the staging word into weight memory[wdata]
//   0x4C AMEM_WR  W write staging bits [2C-1:0] into activation memory[wdata]
//   0x50 AMEM_RD  W load activation memory[wdata] into the staging word
//   0x54 NORM_WR  W write staging bits [39:0] = {thr[15:0], bias[15:0],
//                   scale[7:0]} into the norm memory[wdata]
// Memory accesses from the host are ignored while a layer runs.
// From the paper: 96 OCUs, 158 kB and 117 kB memories, 1.6 bit weights,
// full unrolling, per-channel normalisation and thresholding, one output per
// cycle per channel. This design's: the 3x3 kernel and C = 96 input channels,
// uncompressed 2-bit activations, line-buffer streaming, register map.
module cutie
  import kraken_pkg::*;
#(
  parameter int unsigned N_OCU  = CUTIE_N_OCU,
  parameter int unsigned ADEPTH = 6583,
  parameter int unsigned WDEPTH = 676,
  parameter int unsigned MAX_W  = 64
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  apb_req_t apb_req_i,
  output apb_rsp_t apb_rsp_o,
  output logic     busy_o,
  output logic     done_o
);
  localparam int unsigned NW     = 9 * N_OCU;             // trits per kernel
  localparam int unsigned WBYTES = (NW + 4) / 5;          // 1.6 bit per trit
  localparam int unsigned WBITS  = 8 * WBYTES;
  localparam int unsigned ABITS  = 2 * N_OCU;
  localparam int unsigned SWORDS = (WBITS + 31) / 32;
  localparam int unsigned AAW    = $clog2(ADEPTH);
  localparam int unsigned WAW    = $clog2(WDEPTH);
  localparam int unsigned XW     = $clog2(MAX_W + 1);
  localparam int unsigned OW     = (N_OCU > 1) ? $clog2(N_OCU + 1) : 1;

  typedef enum logic [1:0] {IDLE, WLOAD, STREAM, DRAIN} state_e;
  state_e state_q;

  // ---------------------------------------------------------------- memories
  logic [WBITS-1:0] wmem [WDEPTH];
  logic [39:0]      nmem [WDEPTH];
  logic [ABITS-1:0] amem [ADEPTH];
  logic [WBITS-1:0] wrdata;
  logic [39:0]      nrdata;
  logic [ABITS-1:0] ardata;

  // ---------------------------------------------------------------- host regs
  logic [31:0] layer_q, width_q, height_q, inb_q, outb_q, cycles_q, sidx_q;
  logic [SWORDS*32-1:0] stage_q;
  logic wr, rd, start, host_rd_q;
  logic [7:0] off;
  assign wr    = apb_req_i.psel && apb_req_i.penable && apb_req_i.pwrite;
  assign rd    = apb_req_i.psel && !apb_req_i.pwrite;
  assign off   = apb_req_i.paddr[7:0];
  assign start = wr && off == 8'h00 && apb_req_i.pwdata[0] && state_q == IDLE;

  // ---------------------------------------------------------------- control
  logic [OW-1:0]  wcnt_q;        // weight word being read
  logic [XW-1:0]  xi_q;
  logic [31:0]    yi_q;
  logic           wload_v_q;     // wrdata valid for OCU wcnt_q-1
  logic [N_OCU-1:0] ocu_load;
  // stage 1: activation read returned
  logic           s1_v_q, s1_in_q;
  logic [XW-1:0]  s1_xi_q;
  logic [31:0]    s1_yi_q;
  // stage 2: window registered
  logic           s2_v_q;
  logic [31:0]    s2_addr_q;
  // stage 3: output registered
  logic           s3_v_q;
  logic [31:0]    s3_addr_q;
  trit_t [N_OCU-1:0] s3_pix_q;
  logic [1:0]     drain_q;

  logic           stream_rd;
  logic [31:0]    stream_raddr;
  logic           last_pos;
  assign stream_rd    = (state_q == STREAM) && (32'(xi_q) < width_q) && (yi_q < height_q);
  assign stream_raddr = inb_q + yi_q * width_q + 32'(xi_q);
  assign last_pos     = (32'(xi_q) == width_q) && (yi_q == height_q);

  // memory ports
  always_ff @(posedge clk_i) begin
    // weight / norm memory: read by the controller, written by the host when idle
    wrdata <= wmem[WAW'(layer_q * N_OCU + 32'(wcnt_q))];
    nrdata <= nmem[WAW'(layer_q * N_OCU + 32'(wcnt_q))];
    if (wr && state_q == IDLE && off == 8'h48) wmem[WAW'(apb_req_i.pwdata)] <= stage_q[WBITS-1:0];
    if (wr && state_q == IDLE && off == 8'h54) nmem[WAW'(apb_req_i.pwdata)] <= stage_q[39:0];
    // activation memory: one read and one write port
    if (stream_rd)
      ardata <= amem[AAW'(stream_raddr)];
    else if (wr && state_q == IDLE && off == 8'h50)
      ardata <= amem[AAW'(apb_req_i.pwdata)];
    if (s3_v_q)
      amem[AAW'(s3_addr_q)] <= s3_pix_q;
    else if (wr && state_q == IDLE && off == 8'h4C)
      amem[AAW'(apb_req_i.pwdata)] <= stage_q[ABITS-1:0];
  end

  // ---------------------------------------------------------------- datapath
  trit_t [5*WBYTES-1:0] wtrits;
  trit_t [NW-1:0]       window;
  trit_t [N_OCU-1:0]    pix_in, ocu_act;

  cutie_weight_decoder #(.NBYTES(WBYTES)) u_dec (.packed_i(wrdata), .trits_o(wtrits));

  assign pix_in = s1_in_q ? ardata : '0;

  cutie_window #(.C(N_OCU), .MAX_W(MAX_W), .XW(XW)) u_win (
    .clk_i, .shift_i(s1_v_q), .xi_i(s1_xi_q),
    .mid_ok_i(s1_yi_q >= 1), .top_ok_i(s1_yi_q >= 2),
    .pix_i(pix_in), .window_o(window)
  );

  for (genvar o = 0; o < N_OCU; o++) begin : g_ocu
    logic signed [15:0] acc;
    assign ocu_load[o] = wload_v_q && (32'(wcnt_q) == 32'(o + 1));
    cutie_ocu #(.C(N_OCU)) u_ocu (
      .clk_i, .load_i(ocu_load[o]), .weights_i(wtrits[NW-1:0]),
      .scale_i(nrdata[7:0]), .bias_i(nrdata[23:8]), .thr_i(nrdata[39:24]),
      .window_i(window), .acc_o(acc), .act_o(ocu_act[o])
    );
  end

  assign busy_o = (state_q != IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      layer_q <= '0; width_q <= '0; height_q <= '0; inb_q <= '0; outb_q <= '0;
      cycles_q <= '0; sidx_q <= '0; stage_q <= '0; host_rd_q <= 1'b0;
      wcnt_q <= '0; xi_q <= '0; yi_q <= '0; wload_v_q <= 1'b0;
      s1_v_q <= 1'b0; s1_in_q <= 1'b0; s1_xi_q <= '0; s1_yi_q <= '0;
      s2_v_q <= 1'b0; s2_addr_q <= '0; s3_v_q <= 1'b0; s3_addr_q <= '0; s3_pix_q <= '0;
      drain_q <= '0; done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      // host registers
      host_rd_q <= wr && state_q == IDLE && off == 8'h50;
      if (host_rd_q) stage_q[ABITS-1:0] <= ardata;
      if (wr) unique case (off)
        8'h08: layer_q  <= apb_req_i.pwdata;
        8'h0C: width_q  <= apb_req_i.pwdata;
        8'h10: height_q <= apb_req_i.pwdata;
        8'h14: inb_q    <= apb_req_i.pwdata;
        8'h18: outb_q   <= apb_req_i.pwdata;
        8'h40: sidx_q   <= apb_req_i.pwdata;
        8'h44: begin
          stage_q[32*sidx_q[$clog2(SWORDS)-1:0] +: 32] <= apb_req_i.pwdata;
          sidx_q <= sidx_q + 1;
        end
        default: ;
      endcase

      if (state_q != IDLE) cycles_q <= cycles_q + 1;

      // stage 1..3 pipeline
      s1_v_q  <= (state_q == STREAM);
      s1_in_q <= stream_rd;
      s1_xi_q <= xi_q;
      s1_yi_q <= yi_q;
      s2_v_q    <= s1_v_q && (s1_xi_q >= 1) && (s1_yi_q >= 1);
      s2_addr_q <= outb_q + (s1_yi_q - 1) * width_q + 32'(s1_xi_q) - 1;
      s3_v_q    <= s2_v_q;
      s3_addr_q <= s2_addr_q;
      s3_pix_q  <= ocu_act;

      unique case (state_q)
        IDLE: if (start) begin
          state_q   <= WLOAD;
          wcnt_q    <= '0;
          wload_v_q <= 1'b0;
          cycles_q  <= 32'd1;
        end
        WLOAD: begin
          wcnt_q    <= wcnt_q + 1'b1;
          wload_v_q <= 1'b1;
          if (32'(wcnt_q) == N_OCU) begin
            state_q   <= STREAM;
            wload_v_q <= 1'b0;
            xi_q <= '0; yi_q <= '0;
          end
        end
        STREAM: begin
          if (last_pos) begin
            state_q <= DRAIN;
            drain_q <= '0;
          end else if (32'(xi_q) == width_q) begin
            xi_q <= '0;
            yi_q <= yi_q + 1;
          end else xi_q <= xi_q + 1'b1;
        end
        DRAIN: begin
          drain_q <= drain_q + 1'b1;
          if (drain_q == 2'd2) begin
            state_q <= IDLE;
            done_o  <= 1'b1;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  always_comb begin
    apb_rsp_o = '{pready: 1'b1, pslverr: 1'b0, prdata: '0};
    if (rd) unique case (off)
      8'h04: apb_rsp_o.prdata = {31'h0, busy_o};
      8'h08: apb_rsp_o.prdata = layer_q;
      8'h0C: apb_rsp_o.prdata = width_q;
      8'h10: apb_rsp_o.prdata = height_q;
      8'h14: apb_rsp_o.prdata = inb_q;
      8'h18: apb_rsp_o.prdata = outb_q;
      8'h1C: apb_rsp_o.prdata = cycles_q;
      8'h40: apb_rsp_o.prdata = sidx_q;
      8'h44: apb_rsp_o.prdata = stage_q[32*sidx_q[$clog2(SWORDS)-1:0] +: 32];
      default: ;
    endcase
  end

  a_width: assert property (@(posedge clk_i) disable iff (!rst_ni) start |-> 32'(MAX_W) >= width_q);
endmodule
