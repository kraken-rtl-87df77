// tb_interleaved_memory: the banked scratchpad (interconnect plus SRAM
// banks) with 3 masters, 4 banks and 256 bytes, under random reads and
// writes with random byte enables. Checks every read against a reference
// memory updated in grant order (unwritten bytes are first written through
// the memory itself), that colliding masters are stalled and served in
// round robin, and that the conflict counter moves.
module tb_interleaved_memory
  import kraken_pkg::*;
;
  localparam int NM = 3, NB = 4, BAW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mem_req_t [NM-1:0] req;
  mem_rsp_t [NM-1:0] rsp;
  logic [31:0] conflicts;
  logic [7:0] refm [int];
  logic [31:0] exp_rd [NM];
  bit pend_rd [NM];
  int waitc [NM];
  int checks = 0, failures = 0, reads_ok = 0;

  interleaved_memory #(.N_MST(NM), .N_BANK(NB), .SIZE_BYTES(NB * 4 * 2**BAW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(req), .mst_rsp_o(rsp), .conflicts_o(conflicts));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  bit init_done = 0;
  always @(posedge clk) if (rst_n && init_done) begin
    // responses to last cycle's reads
    for (int m = 0; m < NM; m++)
      if (pend_rd[m]) begin
        check(rsp[m].rvalid && rsp[m].rdata == exp_rd[m], $sformatf("read m%0d got %h exp %h", m, rsp[m].rdata, exp_rd[m]));
        reads_ok++;
        pend_rd[m] = 0;
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
    repeat (3) @(posedge clk);
    rst_n = 1;
    // initialise every word through master 0
    for (int i = 0; i < NB * 2**BAW; i++) begin
      @(negedge clk);
      req[0] = '{req: 1, we: 1, addr: 32'(4 * i), wdata: 32'h0, be: 4'hf};
      @(posedge clk);
      #1;
    end
    @(negedge clk) req[0] = '0;
    init_done = 1;
    repeat (3000) @(posedge clk);
    check(conflicts > 100, $sformatf("bank conflicts seen: %0d", conflicts));
    check(reads_ok > 500, "enough reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
