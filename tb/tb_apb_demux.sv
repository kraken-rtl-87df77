// tb_apb_demux: three register-file slaves modelled in the testbench behind
// the decoder. Checks that writes reach only the addressed slave with the
// region bits stripped, that reads return the addressed slave's data, that
// an unmapped region and a slave marked off answer with an error at once
// and never see psel.
module tb_apb_demux
  import kraken_pkg::*;
;
  localparam int NS = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  apb_req_t req;
  apb_rsp_t rsp;
  apb_req_t [NS-1:0] sreq;
  apb_rsp_t [NS-1:0] srsp;
  logic [NS-1:0] off;
  logic [31:0] regs [NS][16];
  int checks = 0, failures = 0;

  apb_demux #(.N_SLV(NS)) dut (.mst_req_i(req), .mst_rsp_o(rsp), .slv_req_o(sreq),
    .slv_rsp_i(srsp), .slv_off_i(off));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always_comb
    for (int s = 0; s < NS; s++) begin
      srsp[s].pready  = 1'b1;
      srsp[s].pslverr = 1'b0;
      srsp[s].prdata  = regs[s][sreq[s].paddr[5:2]];
    end

  always @(posedge clk)
    for (int s = 0; s < NS; s++) begin
      if (sreq[s].psel && sreq[s].penable && sreq[s].pwrite) regs[s][sreq[s].paddr[5:2]] <= sreq[s].pwdata;
      if (sreq[s].psel) begin
        check(sreq[s].paddr[31:12] == 0, "region stripped");
        check(!off[s], "off slave selected");
      end
    end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] model [NS][16];
    foreach (regs[s, i]) begin regs[s][i] = 0; model[s][i] = 0; end
    req = '0; off = '0;
    for (int it = 0; it < 2000; it++) begin
      int s, r;
      bit wr_op;
      logic [31:0] v, a;
      s = $urandom % 4; r = $urandom % 16; wr_op = 1'($urandom);
      off = 3'($urandom % 8 == 0 ? $urandom : 0);
      v = $urandom;
      a = 32'((s << 12) | (r << 2));
      @(negedge clk) req = '{psel: 1, penable: 0, pwrite: wr_op, paddr: a, pwdata: v};
      @(negedge clk) req.penable = 1;
      #1;
      if (s >= NS || off[s]) check(rsp.pready && rsp.pslverr, "error response");
      else begin
        check(rsp.pready && !rsp.pslverr, "ok response");
        if (!wr_op) check(rsp.prdata == model[s][r], "read data");
        else model[s][r] = v;
      end
      @(negedge clk) req = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
