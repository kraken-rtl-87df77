// tb_sne_dma: the SNE streamers against a memory that withholds grants at
// random. Checks that all events are fetched in order from the source list,
// that every spike is written to consecutive words of the destination list,
// and the spike counter, with random ready on the event side and spikes
// injected while events are still being read.
module tb_sne_dma
  import kraken_pkg::*;
;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, evt_valid, evt_ready, spk_valid, spk_ready;
  logic [31:0] spike_count;
  logic [15:0] evt, spk;
  mem_req_t req;
  mem_rsp_t rsp;
  int checks = 0, failures = 0;
  localparam int NEV = 40, NSPK = 25, SRC = 32'h100, DST = 32'h4000;
  int evn = 0, spn = 0;
  bit started = 0;

  sne_dma dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .src_addr_i(SRC),
    .evt_count_i(NEV), .dst_addr_i(DST), .busy_o(busy), .spike_count_o(spike_count),
    .mem_req_o(req), .mem_rsp_i(rsp), .evt_valid_o(evt_valid), .evt_ready_i(evt_ready),
    .evt_o(evt), .spk_valid_i(spk_valid), .spk_ready_o(spk_ready), .spk_i(spk));
  tb_mem_model #(.RAND_GNT(1)) mem (.clk_i(clk), .req_i(req), .rsp_o(rsp));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (evt_valid && evt_ready) begin
      check(evt == 16'(16'hA000 + evn), $sformatf("event %0d = %h", evn, evt));
      evn++;
    end
    evt_ready <= 1'($urandom);
    if (spk_valid && spk_ready) begin spn++; spk_valid <= 0; end
    else if (started && !spk_valid && spn < NSPK && ($urandom % 5 == 0)) begin
      spk_valid <= 1; spk <= 16'(16'h5000 + spn);
    end
  end

  initial begin
    start = 0; evt_ready = 0; spk_valid = 0; spk = '0;
    for (int i = 0; i < NEV; i++) mem.poke(SRC + 4*i, 32'hA000 + i);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0; started = 1;
    repeat (3000) @(posedge clk);
    check(evn == NEV, $sformatf("events %0d", evn));
    check(!busy, "idle at end");
    check(spike_count == NSPK, $sformatf("spike count %0d", spike_count));
    for (int i = 0; i < NSPK; i++)
      check(mem.peek(DST + 4*i) == 32'h5000 + i, $sformatf("spike word %0d", i));
    check(mem.peek(DST + 4*NSPK) == 0, "no extra write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
