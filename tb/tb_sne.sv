// tb_sne: the Sparse Neural Engine end to end through its APB registers and
// its L2 port (memory model with random grant stalls). Loads random 4-bit
// kernels, clears the neuron states, streams a list of random COO events
// and compares the written spike list, as a multiset, with a reference model
// of all engines; also checks the SOP and event counters and that each event
// costs at least one 9*8-SOP burst (the engines work in parallel, so the
// run takes at least 73 cycles per event).
module tb_sne
  import kraken_pkg::*;
;
  localparam int XW = 5, YW = 5, LCHW = 3, CINW = 5, NENG = 8;
  localparam int NL = 2**LCHW, COUTW = 6;
  localparam int NEV = 150, SRC = 32'h1000, DST = 32'h8000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  mem_req_t req;
  mem_rsp_t rsp;
  logic busy, done;
  int checks = 0, failures = 0;

  sne dut (.clk_i(clk), .rst_ni(rst_n), .apb_req_i(apb_req), .apb_rsp_o(apb_rsp),
           .mem_req_o(req), .mem_rsp_i(rsp), .busy_o(busy), .done_o(done));
  tb_mem_model #(.RAND_GNT(1)) mem (.clk_i(clk), .req_i(req), .rsp_o(rsp));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // APB transfers are driven on the falling edge, so the DUT samples
  // stable values on the rising edge that completes each phase.
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

  logic [35:0] kern [2**(COUTW+CINW)];
  int st [2**COUTW][2**YW][2**XW];
  int exp_cnt [int];
  int exp_spikes = 0, exp_sops = 0;
  int alpha = 200, theta = 10;

  task automatic model_event(int c, int y, int x);
    for (int co = 0; co < 2**COUTW; co++)
      for (int ky = 0; ky < 3; ky++)
        for (int kx = 0; kx < 3; kx++) begin
          int ty, tx, p, lk, s, w;
          logic [35:0] k;
          ty = y - ky + 1; tx = x - kx + 1;
          if (ty < 0 || ty >= 2**YW || tx < 0 || tx >= 2**XW) continue;
          exp_sops++;
          k = kern[(co << CINW) | c];
          w = int'($signed(k[(ky*3+kx)*4 +: 4]));
          p = st[co][ty][tx] * alpha;
          lk = (p >= 0) ? p / 256 : -((-p + 255) / 256);
          s = lk + w;
          if (s > 127) s = 127;
          if (s < -128) s = -128;
          if (s >= theta) begin
            int key;
            st[co][ty][tx] = 0;
            key = (co << (XW+YW)) | (ty << XW) | tx;
            exp_cnt[key] = exp_cnt.exists(key) ? exp_cnt[key] + 1 : 1;
            exp_spikes++;
          end else st[co][ty][tx] = s;
        end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d, nspk, cyc;
    int t0;
    apb_req = '0;
    foreach (st[a, b, c]) st[a][b][c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // kernels
    foreach (kern[i]) begin
      kern[i] = {$urandom, $urandom};
      apb_wr(32'h24, i);
      apb_wr(32'h28, kern[i][31:0]);
      apb_wr(32'h2C, 32'(kern[i][35:32]));
    end
    apb_wr(32'h18, alpha);
    apb_wr(32'h1C, theta);
    apb_rd(32'h1C, d);
    check(d == 32'(theta), "THETA readback");
    // clear the neuron states
    apb_wr(32'h00, 32'h2);
    do apb_rd(32'h04, d); while (d[0]);
    // events
    for (int i = 0; i < NEV; i++) begin
      int c, y, x;
      c = $urandom % 2**CINW; y = $urandom % 2**YW; x = $urandom % 2**XW;
      mem.poke(SRC + 4*i, 32'((c << (XW+YW)) | (y << XW) | x));
      model_event(c, y, x);
    end
    apb_wr(32'h08, SRC);
    apb_wr(32'h0C, NEV);
    apb_wr(32'h10, DST);
    apb_wr(32'h00, 32'h1);
    t0 = $time;
    @(posedge clk);
    while (!done) @(posedge clk);
    apb_rd(32'h14, nspk);
    check(int'(nspk) == exp_spikes, $sformatf("spikes %0d exp %0d", nspk, exp_spikes));
    for (int i = 0; i < int'(nspk); i++) begin
      int key;
      key = int'(mem.peek(DST + 4*i));
      if (exp_cnt.exists(key) && exp_cnt[key] > 0) begin
        exp_cnt[key]--;
        check(1, "");
      end else check(0, $sformatf("unexpected spike %h", key));
    end
    apb_rd(32'h20, d);
    check(int'(d) == exp_sops, $sformatf("sops %0d exp %0d", d, exp_sops));
    apb_rd(32'h34, d);
    check(int'(d) == NEV, "event counter");
    apb_rd(32'h30, cyc);
    check(int'(cyc) >= NEV * (1 + 9 * NL), $sformatf("cycles %0d", cyc));
    $display("SNE: %0d events, %0d spikes, %0d SOPs in %0d cycles", NEV, nspk, exp_sops, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
