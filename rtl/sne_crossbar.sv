// sne_crossbar: event routing between the SNE streamers and its engines.
//
// Input side: one COO event is broadcast to all N engines and is accepted
// only when every engine is ready for it, so all engines see the same event
// sequence. Output side: the engines' spike streams are merged into one
// stream by a round-robin arbiter; an engine that is not granted is
// stalled (its ready stays low) and keeps its spike.
// All paths are combinational, with a registered arbitration pointer.
// The paper shows a crossbar between the SNE DMAs and the engines but does
// not describe it; broadcast-in / arbitrate-out is this design's choice.
module sne_crossbar
  import kraken_pkg::*;
#(
  parameter int unsigned N = SNE_N_ENGINES,
  parameter int unsigned EW = 16       // event width
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // from the input streamer
  input  logic               in_valid_i,
  output logic               in_ready_o,
  // to the engines
  output logic [N-1:0]       eng_valid_o,
  input  logic [N-1:0]       eng_ready_i,
  // spikes from the engines
  input  logic [N-1:0]       spk_valid_i,
  output logic [N-1:0]       spk_ready_o,
  input  logic [N-1:0][EW-1:0] spk_evt_i,
  // merged spikes to the output streamer
  output logic               out_valid_o,
  input  logic               out_ready_i,
  output logic [EW-1:0]      out_evt_o
);
  logic [N-1:0] gnt;
  logic [$clog2(N)-1:0] idx;
  logic any;

  assign in_ready_o  = &eng_ready_i;
  assign eng_valid_o = {N{in_valid_i && in_ready_o}};

  rr_arbiter #(.N(N)) u_arb (
    .clk_i, .rst_ni, .req_i(spk_valid_i), .update_i(out_ready_i),
    .gnt_o(gnt), .idx_o(idx), .valid_o(any)
  );

  assign out_valid_o = any;
  assign out_evt_o   = spk_evt_i[idx];
  assign spk_ready_o = gnt & {N{out_ready_i}};
endmodule
