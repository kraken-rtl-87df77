// pwr_ctrl: power controller for the switchable domains (SNE, CUTIE and the
// cluster), programmed by the fabric controller over APB.
//
// Each domain has a sequencer. Switching on: close the power switch
// (pwr_en_o), wait SETTLE cycles for the rail, enable the clock with the
// domain still in reset for RST_CYCLES cycles, then release reset: the
// domain is ON. Switching off: stop the clock and assert reset, then open
// the power switch one cycle later. Registers (always ready):
//   0x00 REQ    RW  bit d = domain d wanted on (0 SNE, 1 CUTIE, 2 cluster)
//   0x04 STATUS R   bit d = domain d is ON
//   0x08 SWITCHES R number of completed on/off transitions
// The paper states that the three accelerators are power-gateable, and its
// figures show a power controller, clock gating and power gating per domain;
// the sequence and its cycle counts are this design's assumptions.
module pwr_ctrl
  import kraken_pkg::*;
#(
  parameter int unsigned N_DOM      = 3,
  parameter int unsigned SETTLE     = 16,
  parameter int unsigned RST_CYCLES = 2
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  apb_req_t         apb_req_i,
  output apb_rsp_t         apb_rsp_o,
  output logic [N_DOM-1:0] pwr_en_o,    // power switch closed
  output logic [N_DOM-1:0] clk_en_o,    // clock gate enable
  output logic [N_DOM-1:0] rst_no,      // domain reset, active low
  output logic [N_DOM-1:0] on_o
);
  typedef enum logic [2:0] {OFF, RAMP, RESET, ON, ISO} dom_state_e;
  dom_state_e [N_DOM-1:0] st_q;
  logic [N_DOM-1:0][7:0] cnt_q;
  logic [N_DOM-1:0] req_q;
  logic [31:0] switches_q;
  logic wr;
  logic [31:0] n_done;   // transitions completing this cycle
  assign wr = apb_req_i.psel && apb_req_i.penable && apb_req_i.pwrite;

  always_comb begin
    n_done = '0;
    for (int d = 0; d < N_DOM; d++) begin
      if ((st_q[d] == RESET && cnt_q[d] == 8'(RST_CYCLES - 1)) || st_q[d] == ISO) n_done += 1;
      pwr_en_o[d] = (st_q[d] != OFF);
      clk_en_o[d] = (st_q[d] == RESET) || (st_q[d] == ON);
      rst_no[d]   = (st_q[d] == ON);
      on_o[d]     = (st_q[d] == ON);
    end
    apb_rsp_o = '{pready: 1'b1, pslverr: 1'b0, prdata: '0};
    if (apb_req_i.psel && !apb_req_i.pwrite)
      unique case (apb_req_i.paddr[7:0])
        8'h00: apb_rsp_o.prdata = 32'(req_q);
        8'h04: apb_rsp_o.prdata = 32'(on_o);
        8'h08: apb_rsp_o.prdata = switches_q;
        default: ;
      endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= {N_DOM{OFF}};
      cnt_q <= '0;
      req_q <= '0;
      switches_q <= '0;
    end else begin
      if (wr && apb_req_i.paddr[7:0] == 8'h00) req_q <= apb_req_i.pwdata[N_DOM-1:0];
      switches_q <= switches_q + n_done;
      for (int d = 0; d < N_DOM; d++) begin
        unique case (st_q[d])
          OFF:   if (req_q[d]) begin st_q[d] <= RAMP; cnt_q[d] <= '0; end
          RAMP:  if (cnt_q[d] == 8'(SETTLE - 1)) begin st_q[d] <= RESET; cnt_q[d] <= '0; end
                 else cnt_q[d] <= cnt_q[d] + 1'b1;
          RESET: if (cnt_q[d] == 8'(RST_CYCLES - 1)) st_q[d] <= ON;
                 else cnt_q[d] <= cnt_q[d] + 1'b1;
          ON:    if (!req_q[d]) st_q[d] <= ISO;
          ISO:   st_q[d] <= OFF;
          default: st_q[d] <= OFF;
        endcase
      end
    end
  end
endmodule
