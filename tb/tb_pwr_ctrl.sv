// tb_pwr_ctrl: switches the three domains on and off in random orders and
// checks the sequence of each: power switch first, clock and reset only
// after SETTLE cycles, reset released RST_CYCLES cycles after the clock
// starts, and on the way down the clock stopped and reset asserted before
// the switch opens. Also checks the STATUS register and transition count.
module tb_pwr_ctrl
  import kraken_pkg::*;
;
  localparam int SETTLE = 16, RSTC = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  logic [2:0] pwr_en, clk_en, drst_n, on;
  int checks = 0, failures = 0;
  int since_pwr [3], since_clk [3];
  int transitions = 0;

  pwr_ctrl #(.N_DOM(3), .SETTLE(SETTLE), .RST_CYCLES(RSTC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .apb_req_i(apb_req), .apb_rsp_o(apb_rsp),
    .pwr_en_o(pwr_en), .clk_en_o(clk_en), .rst_no(drst_n), .on_o(on));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic apb_wr(logic [31:0] a, logic [31:0] d);
    @(negedge clk) apb_req = '{psel: 1, penable: 0, pwrite: 1, paddr: a, pwdata: d};
    @(negedge clk) apb_req.penable = 1;
    @(negedge clk) apb_req = '0;
  endtask

  task automatic apb_rd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk) apb_req = '{psel: 1, penable: 0, pwrite: 0, paddr: a, pwdata: 0};
    @(negedge clk) apb_req.penable = 1;
    d = apb_rsp.prdata;
    @(negedge clk) apb_req = '0;
  endtask

  logic [2:0] clk_en_d, drst_n_d, pwr_en_d;
  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < 3; d++) begin
      since_pwr[d] = pwr_en[d] ? since_pwr[d] + 1 : 0;
      since_clk[d] = clk_en[d] ? since_clk[d] + 1 : 0;
      check(!clk_en[d] || pwr_en[d], "clock only when powered");
      check(!drst_n[d] || clk_en[d], "out of reset only when clocked");
      if (clk_en[d] && !clk_en_d[d]) check(since_pwr[d] == SETTLE + 1, $sformatf("settle %0d", since_pwr[d]));
      if (drst_n[d] && !drst_n_d[d]) begin
        check(since_clk[d] == RSTC + 1, $sformatf("reset length %0d", since_clk[d]));
        transitions++;
      end
      if (!pwr_en[d] && pwr_en_d[d]) begin
        check(!clk_en_d[d] && !drst_n_d[d], "clock and reset off before switch opens");
        transitions++;
      end
      check(on[d] == drst_n[d], "on flag");
    end
    clk_en_d <= clk_en; drst_n_d <= drst_n; pwr_en_d <= pwr_en;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    apb_req = '0; clk_en_d = '0; drst_n_d = '0; pwr_en_d = '0;
    foreach (since_pwr[i]) begin since_pwr[i] = 0; since_clk[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 30; it++) begin
      logic [2:0] want;
      want = 3'($urandom);
      apb_wr(32'h0, 32'(want));
      repeat (SETTLE + RSTC + 6) @(posedge clk);
      apb_rd(32'h4, d);
      check(d[2:0] == want, $sformatf("status %b want %b", d[2:0], want));
      check(pwr_en == want, "switches follow request");
    end
    apb_rd(32'h8, d);
    check(int'(d) == transitions, $sformatf("transition count %0d exp %0d", d, transitions));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
