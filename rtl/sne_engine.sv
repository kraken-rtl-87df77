// sne_engine: one of the eight SNE convolution engines.
//
// An input spike arrives as a COO event {input channel, y, x}. The engine
// turns it into a dense burst of synaptic operations: for each of its
// 2**LCHW output channels and each of the 3x3 kernel taps it updates the
// neuron the event reaches, one SOP per cycle, in the order
// (local channel, ky, kx). The neuron states (8 bit each) live in the
// engine's own state memory of 2**(LCHW+YW+XW) bytes, 8 KiB by default as in
// the paper. Output neurons follow a "same" 3x3 convolution:
// out(y0,x0) += w[ky][kx] * in(y0+ky-1, x0+kx-1), so an event at (y,x) hits
// (y-ky+1, x-kx+1); taps that fall outside the map are skipped but still take
// their cycle, which makes a burst last exactly 9 * 2**LCHW cycles.
// A neuron that fires is emitted as an output event {global channel, y0, x0}
// on a valid/ready port; the engine stalls that SOP until it is accepted.
//
// Timing: evt_ready_o is high only in IDLE; one accept cycle plus
// 9*2**LCHW SOP cycles per event when no output stalls. clear_i starts a
// sweep that zeroes the state memory, one word per cycle.
// The paper gives the engine count, the state memory size, 4-bit 3x3 kernels
// and the event-to-burst principle; the loop order, the padding, the memory
// layout {local channel, y, x} and the handshakes are this design's own.
module sne_engine
  import kraken_pkg::*;
#(
  parameter int unsigned ENGINE_ID = 0,
  parameter int unsigned XW   = SNE_XW,
  parameter int unsigned YW   = SNE_YW,
  parameter int unsigned LCHW = SNE_LCHW,
  parameter int unsigned CINW = SNE_CINW,
  parameter int unsigned COUTW = SNE_COUTW
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   clear_i,      // start zeroing the state memory
  input  logic [7:0]             alpha_i,
  input  logic signed [7:0]      theta_i,
  // input event
  input  logic                   evt_valid_i,
  output logic                   evt_ready_o,
  input  logic [CINW-1:0]        evt_cin_i,
  input  logic [YW-1:0]          evt_y_i,
  input  logic [XW-1:0]          evt_x_i,
  // weight buffer read (combinational)
  output logic [COUTW+CINW-1:0]  w_addr_o,     // {cout, cin}
  input  logic [35:0]            w_kernel_i,   // tap (ky,kx) at bits [(3ky+kx)*4 +: 4]
  // output spikes
  output logic                   out_valid_o,
  input  logic                   out_ready_i,
  output logic [COUTW-1:0]       out_ch_o,
  output logic [YW-1:0]          out_y_o,
  output logic [XW-1:0]          out_x_o,
  output logic                   busy_o,
  output logic [31:0]            sop_count_o   // SOPs performed (in-range taps)
);
  localparam int unsigned AW = LCHW + YW + XW;

  typedef enum logic [1:0] {IDLE, BURST, CLEAR} state_e;
  state_e state_q;

  logic signed [7:0] mem [2**AW];

  logic [CINW-1:0] cin_q;
  logic [YW-1:0]   y_q;
  logic [XW-1:0]   x_q;
  logic [LCHW-1:0] lc_q;
  logic [1:0]      ky_q, kx_q;
  logic [AW-1:0]   clr_q;

  // target neuron of the current tap
  logic signed [YW+1:0] ty;
  logic signed [XW+1:0] tx;
  logic                 in_range;
  logic [AW-1:0]        n_addr;
  logic signed [3:0]    w;
  logic signed [7:0]    v_new;
  logic                 spike;
  logic                 last_tap, advance;

  always_comb begin
    ty       = $signed({2'b00, y_q}) - $signed({{YW{1'b0}}, ky_q}) + 1;
    tx       = $signed({2'b00, x_q}) - $signed({{XW{1'b0}}, kx_q}) + 1;
    in_range = (ty >= 0) && (ty < 2**YW) && (tx >= 0) && (tx < 2**XW);
    n_addr   = {lc_q, ty[YW-1:0], tx[XW-1:0]};
    w_addr_o = {COUTW'(ENGINE_ID * 2**LCHW + lc_q), cin_q};
    w        = $signed(w_kernel_i[(ky_q*3 + kx_q)*4 +: 4]);
  end

  sne_lif_unit u_lif (
    .v_i(mem[n_addr]), .w_i(w), .alpha_i(alpha_i), .theta_i(theta_i),
    .v_o(v_new), .spike_o(spike)
  );

  assign out_valid_o = (state_q == BURST) && in_range && spike;
  assign out_ch_o    = COUTW'(ENGINE_ID * 2**LCHW + lc_q);
  assign out_y_o     = ty[YW-1:0];
  assign out_x_o     = tx[XW-1:0];
  assign evt_ready_o = (state_q == IDLE) && !clear_i;
  assign busy_o      = (state_q != IDLE);
  assign last_tap    = (lc_q == LCHW'(2**LCHW - 1)) && (ky_q == 2'd2) && (kx_q == 2'd2);
  assign advance     = (state_q == BURST) && (!out_valid_o || out_ready_i);

  // state memory write port
  always_ff @(posedge clk_i) begin
    if (state_q == CLEAR)
      mem[clr_q] <= 8'sd0;
    else if (advance && in_range)
      mem[n_addr] <= v_new;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= IDLE;
      cin_q       <= '0; y_q <= '0; x_q <= '0;
      lc_q        <= '0; ky_q <= '0; kx_q <= '0;
      clr_q       <= '0;
      sop_count_o <= '0;
    end else begin
      unique case (state_q)
        IDLE: begin
          if (clear_i) begin
            state_q <= CLEAR;
            clr_q   <= '0;
          end else if (evt_valid_i) begin
            state_q <= BURST;
            cin_q   <= evt_cin_i; y_q <= evt_y_i; x_q <= evt_x_i;
            lc_q    <= '0; ky_q <= '0; kx_q <= '0;
          end
        end
        BURST: if (advance) begin
          if (in_range) sop_count_o <= sop_count_o + 1;
          if (last_tap) state_q <= IDLE;
          if (kx_q == 2'd2) begin
            kx_q <= '0;
            if (ky_q == 2'd2) begin
              ky_q <= '0;
              lc_q <= lc_q + 1'b1;
            end else ky_q <= ky_q + 1'b1;
          end else kx_q <= kx_q + 1'b1;
        end
        CLEAR: begin
          clr_q <= clr_q + 1'b1;
          if (clr_q == AW'(2**AW - 1)) state_q <= IDLE;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  // an emitted spike must be held stable until it is taken
  a_out_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    out_valid_o && !out_ready_i |=> out_valid_o && $stable({out_ch_o, out_y_o, out_x_o}));
endmodule
