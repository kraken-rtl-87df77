// tb_log_interconnect: three masters issue random reads and writes with
// random byte enables to four interleaved banks, which the testbench models
// itself. Checks that every read returns the last data written to that byte
// address (a reference memory updated in grant order), that each granted
// request reached the right bank and word, that no bank grants two masters
// at once, that same-bank collisions really stall masters, and that a
// waiting master is served within N_MST cycles (round robin).
module tb_log_interconnect
  import kraken_pkg::*;
;
  localparam int NM = 3, NB = 4, BAW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mem_req_t [NM-1:0] req;
  mem_rsp_t [NM-1:0] rsp;
  logic [NB-1:0] b_req, b_we;
  logic [NB-1:0][BAW-1:0] b_addr;
  logic [NB-1:0][31:0] b_wdata, b_rdata;
  logic [NB-1:0][3:0] b_be;
  logic [31:0] conflicts;
  logic [31:0] bank [NB][2**BAW];
  logic [7:0] refm [int];
  logic [31:0] exp_rd [NM];
  bit pend_rd [NM];
  int waitc [NM];
  int checks = 0, failures = 0, reads_ok = 0;

  log_interconnect #(.N_MST(NM), .N_BANK(NB), .BANK_AW(BAW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(req), .mst_rsp_o(rsp),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_addr_o(b_addr), .bank_wdata_o(b_wdata),
    .bank_be_o(b_be), .bank_rdata_i(b_rdata), .conflicts_o(conflicts));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // bank models
  always @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (b_req[b]) begin
        if (b_we[b]) begin
          for (int k = 0; k < 4; k++) if (b_be[b][k]) bank[b][b_addr[b]][8*k +: 8] <= b_wdata[b][8*k +: 8];
        end else b_rdata[b] <= bank[b][b_addr[b]];
      end

  always @(posedge clk) if (rst_n) begin
    // responses to last cycle's reads
    for (int m = 0; m < NM; m++)
      if (pend_rd[m]) begin
        check(rsp[m].rvalid && rsp[m].rdata == exp_rd[m], $sformatf("read m%0d got %h exp %h", m, rsp[m].rdata, exp_rd[m]));
        reads_ok++;
        pend_rd[m] = 0;
      end
    for (int b = 0; b < NB; b++) begin
      int n;
      n = 0;
      for (int m = 0; m < NM; m++)
        if (rsp[m].gnt && req[m].addr[3:2] == b) begin
          n++;
          check(b_req[b] && b_addr[b] == req[m].addr[4 +: BAW] && b_we[b] == req[m].we, "routed to bank");
        end
      check(n <= 1, "one grant per bank");
    end
    for (int m = 0; m < NM; m++) begin
      if (req[m].req && !rsp[m].gnt) begin
        waitc[m]++;
        check(waitc[m] < NM, "fairness");
      end else waitc[m] = 0;
      if (req[m].req && rsp[m].gnt) begin
        int unsigned a;
        a = req[m].addr & 32'hfffffffc;
        if (req[m].we) begin
          for (int k = 0; k < 4; k++) if (req[m].be[k]) refm[a + k] = req[m].wdata[8*k +: 8];
        end else begin
          for (int k = 0; k < 4; k++) exp_rd[m][8*k +: 8] = refm.exists(a + k) ? refm[a + k] : 8'h00;
          pend_rd[m] = 1;
        end
      end
    end
    // next requests: hold an ungranted request, otherwise draw a new one
    for (int m = 0; m < NM; m++)
      if (!req[m].req || rsp[m].gnt) begin
        req[m].req   <= 1'($urandom % 4 != 0);
        req[m].we    <= 1'($urandom);
        req[m].addr  <= {24'h0, 4'($urandom), 2'($urandom), 2'b00} & 32'h3c;
        req[m].wdata <= $urandom;
        req[m].be    <= 4'($urandom);
      end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0;
    foreach (pend_rd[m]) begin pend_rd[m] = 0; waitc[m] = 0; end
    foreach (bank[b, i]) bank[b][i] = '0;
    b_rdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    check(conflicts > 100, $sformatf("bank conflicts seen: %0d", conflicts));
    check(reads_ok > 500, "enough reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
