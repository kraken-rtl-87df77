// tb_sne_crossbar: four engines producing random spikes under random
// back-pressure. Checks that every spike leaves the crossbar exactly once,
// unchanged, that an engine is never told ready unless granted, that each
// engine is served within N grants while it waits (round-robin fairness),
// and that an input event reaches the engines only when all are ready.
module tb_sne_crossbar;
  localparam int N = 4, EW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [N-1:0] eng_valid, eng_ready, spk_valid, spk_ready;
  logic [N-1:0][EW-1:0] spk_evt;
  logic [EW-1:0] out_evt;
  int checks = 0, failures = 0;
  int pending [N];
  int waited [N];
  int seq [N];
  int recv = 0, sent = 0;

  sne_crossbar #(.N(N), .EW(EW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .eng_valid_o(eng_valid), .eng_ready_i(eng_ready),
    .spk_valid_i(spk_valid), .spk_ready_o(spk_ready), .spk_evt_i(spk_evt),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_evt_o(out_evt));

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
    // checks on the current cycle's values
    check(in_ready == &eng_ready, "in_ready");
    check(eng_valid == {N{in_valid && (&eng_ready)}}, "broadcast");
    check((spk_ready & ~spk_valid) == '0, "ready without valid");
    check($onehot0(spk_ready), "one grant");
    if (out_valid && out_ready) begin
      int e;
      e = int'(out_evt[EW-1:12]);
      check(spk_ready[e] && out_evt == spk_evt[e], "merged spike matches its engine");
      recv++;
    end
    for (int e = 0; e < N; e++) begin
      if (spk_valid[e] && !spk_ready[e] && out_ready) waited[e]++;
      if (spk_ready[e]) begin
        check(waited[e] < N, "fairness");
        waited[e] = 0;
      end
    end
    // next cycle's stimulus
    for (int e = 0; e < N; e++) begin
      if (spk_valid[e] && spk_ready[e]) begin spk_valid[e] <= 0; seq[e]++; end
      else if (!spk_valid[e] && ($urandom % 3 == 0)) begin
        spk_valid[e] <= 1;
        spk_evt[e] <= EW'((e << 12) | (seq[e] & 12'hfff));
        sent++;
      end
    end
    out_ready <= 1'($urandom % 4 != 0);
    eng_ready <= N'($urandom);
    in_valid  <= 1'($urandom);
  end

  initial begin
    spk_valid = '0; spk_evt = '0; out_ready = 0; eng_ready = '0; in_valid = 0;
    foreach (waited[e]) begin waited[e] = 0; seq[e] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(posedge clk);
    check(recv > 500, $sformatf("throughput: %0d spikes", recv));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
