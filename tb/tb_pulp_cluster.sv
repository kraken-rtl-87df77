// tb_pulp_cluster: eight core ports hammer the 128 KiB shared L1 with random
// word reads and writes, each core in its own 1 KiB window spread over all
// banks, so bank conflicts are frequent but data never races. Every read is
// checked against the core's own reference copy. Each core's dot-product
// unit is checked on one 8x4-bit mixed-precision and one 2x2-bit product.
module tb_pulp_cluster
  import kraken_pkg::*;
;
  localparam int NC = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t [NC-1:0] req;
  mem_rsp_t [NC-1:0] rsp;
  logic [NC-1:0] dwe;
  logic [NC-1:0][6:0] dcsr;
  logic [NC-1:0][31:0] da, db, dacc, dres;
  logic [31:0] l1_conf;
  int checks = 0, failures = 0;
  logic [31:0] refm [NC][256];
  bit pend [NC];
  logic [31:0] expd [NC];

  pulp_cluster dut (.clk_i(clk), .rst_ni(rst_n), .core_req_i(req), .core_rsp_o(rsp),
    .dotp_csr_we_i(dwe), .dotp_csr_i(dcsr), .dotp_a_i(da), .dotp_b_i(db), .dotp_acc_i(dacc),
    .dotp_res_o(dres), .l1_conflicts_o(l1_conf));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  bit run = 0;
  always @(posedge clk) if (run) begin
    for (int c = 0; c < NC; c++) begin
      if (pend[c]) begin
        check(rsp[c].rvalid && rsp[c].rdata == expd[c], $sformatf("core %0d read", c));
        pend[c] = 0;
      end
      if (req[c].req && rsp[c].gnt) begin
        int w;
        w = int'(req[c].addr[9:2]);
        if (req[c].we) refm[c][w] = req[c].wdata;
        else begin expd[c] = refm[c][w]; pend[c] = 1; end
      end
      if (!req[c].req || rsp[c].gnt) begin
        req[c].req   <= 1'($urandom % 3 != 0);
        req[c].we    <= 1'($urandom);
        req[c].addr  <= 32'((c << 10) | (($urandom % 256) << 2));
        req[c].wdata <= $urandom;
        req[c].be    <= 4'hf;
      end
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; dwe = '0; dcsr = '0; da = '0; db = '0; dacc = '0;
    foreach (pend[c]) pend[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // initialise each core's window
    for (int w = 0; w < 256; w++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        req[c] = '{req: 1, we: 1, addr: 32'((c << 10) | (w << 2)), wdata: 32'(c * 1000 + w), be: 4'hf};
        refm[c][w] = 32'(c * 1000 + w);
      end
      @(posedge clk);
      #1;
      while (rsp != '0 && (rsp[0].gnt & rsp[1].gnt & rsp[2].gnt & rsp[3].gnt & rsp[4].gnt & rsp[5].gnt & rsp[6].gnt & rsp[7].gnt) == 0) begin
        for (int c = 0; c < NC; c++) if (rsp[c].gnt) req[c].req = 0;
        @(posedge clk); #1;
      end
    end
    @(negedge clk) req = '0;
    // re-write with one core at a time to be sure every word is initialised
    for (int c = 0; c < NC; c++)
      for (int w = 0; w < 256; w++) begin
        @(negedge clk) req[c] = '{req: 1, we: 1, addr: 32'((c << 10) | (w << 2)), wdata: 32'(c * 1000 + w), be: 4'hf};
        @(negedge clk) req[c] = '0;
      end
    run = 1;
    repeat (4000) @(posedge clk);
    run = 0;
    check(l1_conf > 100, $sformatf("L1 bank conflicts %0d", l1_conf));
    // dot products: a = 8-bit {1,-2,3,-4}, b = 4-bit {..}, sel 0
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin dwe[c] = 1; dcsr[c] = 7'b000_01_00; end
    @(negedge clk);
    dwe = '0;
    for (int c = 0; c < NC; c++) begin
      da[c] = 32'hFC03FE01; db[c] = 32'h0000_F321; dacc[c] = 32'(c);
    end
    #1;
    // 1*1 + (-2)*2 + 3*3 + (-4)*(-1) = 1 - 4 + 9 + 4 = 10
    for (int c = 0; c < NC; c++) check(dres[c] == 32'(10 + c), $sformatf("dotp 8x4 core %0d = %0d", c, dres[c]));
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin dwe[c] = 1; dcsr[c] = 7'b000_10_10; end
    @(negedge clk);
    dwe = '0;
    for (int c = 0; c < NC; c++) begin da[c] = 32'hFFFFFFFF; db[c] = 32'h55555555; dacc[c] = 0; end
    #1;
    // 16 x (-1 * 1) = -16
    for (int c = 0; c < NC; c++) check(dres[c] == -32'sd16, $sformatf("dotp 2x2 core %0d", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
