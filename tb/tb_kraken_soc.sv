// tb_kraken_soc: the whole SoC at its default sizes, driven the way the
// fabric controller would drive it, with the uDMA port and the cluster
// cores generating background traffic.
//   1. An APB access to CUTIE while its domain is off must fail.
//   2. The power controller brings up SNE, CUTIE and the cluster.
//   3. SNE: kernels are loaded over APB, a list of DVS-like COO events is
//      written into L2 through the FC port, SNE streams it from L2 and
//      writes its spikes back to L2; the spike list is read back through
//      the FC port and compared, as a multiset, with a reference model.
//   4. CUTIE (96 channels) runs one ternary 3x3 layer on a small map at the
//      same time; the output pixels are read back and compared with a
//      reference convolution, and the layer time is checked.
//   5. SNE is switched off again and must answer with errors.
// Counted mechanisms, each must occur: L2 bank conflicts, L1 bank
// conflicts, crossbar output stalls in SNE, APB errors on a gated domain,
// power-up and power-down sequences, a CUTIE layer, an SNE run.
module tb_kraken_soc
  import kraken_pkg::*;
;
  localparam int NC = 8;
  localparam int XW = 5, YW = 5, CINW = 5, COUTW = 6;
  localparam int NEV = 60, SRC = 32'h0001_0000, DST = 32'h0002_0000;
  localparam int NO = CUTIE_N_OCU, W = 4, H = 3;
  localparam int NW = 9 * NO, WBYTES = (NW + 4) / 5, SW = (8 * WBYTES + 31) / 32;
  localparam int AW32 = (2 * NO + 31) / 32;
  localparam logic [31:0] SNE_B = 32'h1000, CUT_B = 32'h2000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  mem_req_t fc_req, udma_req, cl_req;
  mem_rsp_t fc_rsp, udma_rsp, cl_rsp;
  mem_req_t [NC-1:0] core_req;
  mem_rsp_t [NC-1:0] core_rsp;
  logic [NC-1:0] dwe;
  logic [NC-1:0][6:0] dcsr;
  logic [NC-1:0][31:0] da, db, dacc, dres;
  logic [2:0] pwr_en;
  logic sne_done, cutie_done;
  logic [31:0] l2_conf, l1_conf;
  int checks = 0, failures = 0;

  kraken_soc dut (
    .clk_i(clk), .rst_ni(rst_n), .fc_apb_req_i(apb_req), .fc_apb_rsp_o(apb_rsp),
    .fc_mem_req_i(fc_req), .fc_mem_rsp_o(fc_rsp), .udma_mem_req_i(udma_req), .udma_mem_rsp_o(udma_rsp),
    .cl_l2_req_i(cl_req), .cl_l2_rsp_o(cl_rsp), .core_req_i(core_req), .core_rsp_o(core_rsp),
    .dotp_csr_we_i(dwe), .dotp_csr_i(dcsr), .dotp_a_i(da), .dotp_b_i(db), .dotp_acc_i(dacc),
    .dotp_res_o(dres), .pwr_en_o(pwr_en), .sne_done_o(sne_done), .cutie_done_o(cutie_done),
    .l2_conflicts_o(l2_conf), .l1_conflicts_o(l1_conf));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------- FC bus tasks
  bit apb_err;
  task automatic apb_wr(logic [31:0] a, logic [31:0] d);
    @(negedge clk) apb_req = '{psel: 1, penable: 0, pwrite: 1, paddr: a, pwdata: d};
    @(negedge clk) apb_req.penable = 1;
    apb_err = apb_rsp.pslverr;
    @(negedge clk) apb_req = '0;
  endtask

  task automatic apb_rd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk) apb_req = '{psel: 1, penable: 0, pwrite: 0, paddr: a, pwdata: 0};
    @(negedge clk) apb_req.penable = 1;
    d = apb_rsp.prdata;
    apb_err = apb_rsp.pslverr;
    @(negedge clk) apb_req = '0;
  endtask

  task automatic l2_wr(logic [31:0] a, logic [31:0] d);
    @(negedge clk) fc_req = '{req: 1, we: 1, addr: a, wdata: d, be: 4'hf};
    #1;
    while (!fc_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk) fc_req = '0;
  endtask

  task automatic l2_rd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk) fc_req = '{req: 1, we: 0, addr: a, wdata: 0, be: 4'hf};
    #1;
    while (!fc_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk) fc_req = '0;
    d = fc_rsp.rdata;
  endtask

  // ------------------------------------------------------------- background
  bit bg = 0;
  int xbar_stalls = 0, pwr_ups = 0, pwr_downs = 0, apb_errors = 0;
  logic [2:0] pwr_en_d = '0;
  always @(posedge clk) begin
    if (bg) begin
      // uDMA streams writes into a scratch area, the cluster cores use L1
      udma_req <= '{req: 1'($urandom % 2), we: 1, addr: 32'h0008_0000 | 32'(($urandom % 64) << 2),
                    wdata: $urandom, be: 4'hf};
      for (int c = 0; c < NC; c++)
        core_req[c] <= '{req: 1'($urandom % 2), we: 1'($urandom), addr: 32'(($urandom % 512) << 2),
                         wdata: $urandom, be: 4'hf};
    end else begin
      udma_req <= '0;
      core_req <= '0;
    end
    if (|(dut.u_sne.o_valid & ~dut.u_sne.o_ready)) xbar_stalls++;
    if (rst_n) begin
      for (int d = 0; d < 3; d++) begin
        if (pwr_en[d] && !pwr_en_d[d]) pwr_ups++;
        if (!pwr_en[d] && pwr_en_d[d]) pwr_downs++;
      end
      pwr_en_d <= pwr_en;
    end
  end

  // ------------------------------------------------------------- SNE model
  logic [35:0] kern [2**(COUTW+CINW)];
  int st [2**COUTW][2**YW][2**XW];
  int exp_cnt [int];
  int exp_spikes = 0;
  int alpha = 220, theta = 9;

  task automatic sne_model(int c, int y, int x);
    for (int co = 0; co < 2**COUTW; co++)
      for (int ky = 0; ky < 3; ky++)
        for (int kx = 0; kx < 3; kx++) begin
          int ty, tx, p, lk, s, w;
          logic [35:0] k;
          ty = y - ky + 1; tx = x - kx + 1;
          if (ty < 0 || ty >= 2**YW || tx < 0 || tx >= 2**XW) continue;
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

  // ------------------------------------------------------------- CUTIE model
  int wt [NO][NW];
  int sc [NO], bi [NO], th [NO];
  int fin [H][W][NO], fout [H][W][NO];

  function automatic logic [1:0] enc(int v);
    return (v == 1) ? 2'b01 : (v == -1) ? 2'b11 : 2'b00;
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int cyc_start, sne_cycles;
    apb_req = '0; fc_req = '0; udma_req = '0; cl_req = '0; core_req = '0;
    dwe = '0; dcsr = '0; da = '0; db = '0; dacc = '0;
    foreach (st[a, b, c]) st[a][b][c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. gated domain
    apb_rd(CUT_B + 32'h04, d);
    check(apb_err, "CUTIE off: APB error");
    if (apb_err) apb_errors++;

    // 2. power up all three domains
    apb_wr(32'h0000, 32'h7);
    do apb_rd(32'h0004, d); while (d[2:0] != 3'h7);
    check(pwr_en == 3'h7, "power switches closed");
    bg = 1;

    // 3a. SNE setup
    foreach (kern[i]) begin
      kern[i] = {$urandom, $urandom};
      apb_wr(SNE_B + 32'h24, i);
      apb_wr(SNE_B + 32'h28, kern[i][31:0]);
      apb_wr(SNE_B + 32'h2C, 32'(kern[i][35:32]));
    end
    apb_wr(SNE_B + 32'h18, alpha);
    apb_wr(SNE_B + 32'h1C, theta);
    check(!apb_err, "SNE on: no APB error");
    apb_wr(SNE_B + 32'h00, 32'h2);
    do apb_rd(SNE_B + 32'h04, d); while (d[0]);
    for (int i = 0; i < NEV; i++) begin
      int c, y, x;
      c = $urandom % 2**CINW; y = $urandom % 2**YW; x = $urandom % 2**XW;
      if (i % 4 == 0) begin y = 10; x = 10; end       // a hot spot: many spikes
      l2_wr(SRC + 4*i, 32'((c << (XW+YW)) | (y << XW) | x));
      sne_model(c, y, x);
    end

    // 4a. CUTIE setup: kernels, norm parameters, input map
    for (int o = 0; o < NO; o++) begin
      logic [SW*32-1:0] wv;
      wv = '0;
      for (int i = 0; i < NW; i++) wt[o][i] = int'($urandom % 3) - 1;
      for (int b = 0; b < WBYTES; b++) begin
        int v;
        v = 0;
        for (int j = 4; j >= 0; j--) v = v * 3 + ((5*b + j < NW) ? wt[o][5*b + j] + 1 : 1);
        wv[8*b +: 8] = 8'(v);
      end
      apb_wr(CUT_B + 32'h40, 0);
      for (int i = 0; i < SW; i++) apb_wr(CUT_B + 32'h44, wv[32*i +: 32]);
      apb_wr(CUT_B + 32'h48, o);
      sc[o] = int'($urandom % 5) - 1; bi[o] = int'($urandom % 40) - 20; th[o] = $urandom % 30;
      apb_wr(CUT_B + 32'h40, 0);
      apb_wr(CUT_B + 32'h44, {8'(th[o]), 16'(bi[o]), 8'(sc[o])});
      apb_wr(CUT_B + 32'h44, 32'(th[o]) >> 8);
      apb_wr(CUT_B + 32'h54, o);
    end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        logic [AW32*32-1:0] v;
        v = '0;
        for (int c = 0; c < NO; c++) begin
          fin[y][x][c] = int'($urandom % 3) - 1;
          v[2*c +: 2] = enc(fin[y][x][c]);
        end
        apb_wr(CUT_B + 32'h40, 0);
        for (int i = 0; i < AW32; i++) apb_wr(CUT_B + 32'h44, v[32*i +: 32]);
        apb_wr(CUT_B + 32'h4C, y * W + x);
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int o = 0; o < NO; o++) begin
          int a, yv;
          a = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              for (int c = 0; c < NO; c++)
                if (y+ky-1 >= 0 && y+ky-1 < H && x+kx-1 >= 0 && x+kx-1 < W)
                  a += wt[o][(ky*3+kx)*NO + c] * fin[y+ky-1][x+kx-1][c];
          yv = a * sc[o] + bi[o];
          fout[y][x][o] = (yv > th[o]) ? 1 : (yv < -th[o]) ? -1 : 0;
        end

    // 3b/4b. start both engines
    apb_wr(SNE_B + 32'h08, SRC);
    apb_wr(SNE_B + 32'h0C, NEV);
    apb_wr(SNE_B + 32'h10, DST);
    apb_wr(CUT_B + 32'h08, 0); apb_wr(CUT_B + 32'h0C, W); apb_wr(CUT_B + 32'h10, H);
    apb_wr(CUT_B + 32'h14, 0); apb_wr(CUT_B + 32'h18, 1000);
    apb_wr(SNE_B + 32'h00, 32'h1);
    apb_wr(CUT_B + 32'h00, 32'h1);
    fork
      begin @(posedge cutie_done); end
      begin @(posedge sne_done); end
    join
    do apb_rd(SNE_B + 32'h04, d); while (d[0]);
    do apb_rd(CUT_B + 32'h04, d); while (d[0]);
    bg = 0;

    // 3c. SNE results from L2
    apb_rd(SNE_B + 32'h14, d);
    check(int'(d) == exp_spikes, $sformatf("SNE spikes %0d exp %0d", d, exp_spikes));
    for (int i = 0; i < exp_spikes; i++) begin
      int key;
      l2_rd(DST + 4*i, d);
      key = int'(d);
      if (exp_cnt.exists(key) && exp_cnt[key] > 0) begin exp_cnt[key]--; check(1, ""); end
      else check(0, $sformatf("unexpected spike %h", key));
    end
    apb_rd(SNE_B + 32'h30, d);
    sne_cycles = int'(d);

    // 4c. CUTIE results
    apb_rd(CUT_B + 32'h1C, d);
    check(int'(d) == NO + 5 + (W+1)*(H+1), $sformatf("CUTIE layer cycles %0d", d));
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        logic [AW32*32-1:0] v;
        apb_wr(CUT_B + 32'h50, 1000 + y * W + x);
        apb_wr(CUT_B + 32'h40, 0);
        for (int i = 0; i < AW32; i++) begin
          apb_rd(CUT_B + 32'h44, d);
          v[32*i +: 32] = d;
          apb_wr(CUT_B + 32'h40, i + 1);
        end
        for (int c = 0; c < NO; c++)
          check(v[2*c +: 2] == enc(fout[y][x][c]), $sformatf("CUTIE pixel (%0d,%0d) ch %0d", x, y, c));
      end

    // 5. power SNE down again
    apb_wr(32'h0000, 32'h6);
    do apb_rd(32'h0004, d); while (d[0]);
    repeat (3) @(posedge clk);
    check(pwr_en == 3'h6, "SNE switch open");
    apb_rd(SNE_B + 32'h14, d);
    check(apb_err, "SNE off: APB error");
    if (apb_err) apb_errors++;

    // mechanisms
    $display("SNE %0d events -> %0d spikes in %0d cycles; L2 conflicts %0d, L1 conflicts %0d, xbar stalls %0d, power ups %0d downs %0d, APB errors %0d",
             NEV, exp_spikes, sne_cycles, l2_conf, l1_conf, xbar_stalls, pwr_ups, pwr_downs, apb_errors);
    check(l2_conf > 0, "L2 bank conflict happened");
    check(l1_conf > 0, "L1 bank conflict happened");
    check(xbar_stalls > 0, "SNE crossbar stall happened");
    check(pwr_ups == 3 && pwr_downs == 1, "power sequences");
    check(apb_errors == 2, "gated-domain APB errors");
    check(exp_spikes > 0, "SNE produced spikes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
