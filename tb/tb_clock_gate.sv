// tb_clock_gate: counts gated clock pulses while the enable toggles at
// random between clock edges. Every pulse must be a whole input pulse
// (gated clock never high while the input clock is low, never shorter than
// the input's high phase), a pulse appears exactly in the cycles whose
// enable was set before the rising edge, and test enable forces the clock.
module tb_clock_gate;
  logic clk = 0, en = 0, ten = 0, gclk;
  int checks = 0, failures = 0, pulses = 0, expected = 0;
  realtime rise_t;

  clock_gate dut (.clk_i(clk), .en_i(en), .test_en_i(ten), .clk_o(gclk));

  always #5 clk = ~clk;

  always @(posedge gclk) begin
    rise_t = $realtime;
    pulses++;
    checks++;
    if (!clk) failures++;
  end
  always @(negedge gclk) if ($time > 0) begin
    checks++;
    if ($realtime - rise_t < 5.0) failures++;
  end
  always @(gclk) if (gclk && !clk) failures++;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      #1 en = 1'($urandom);
      ten = (i >= 350);
      #2 if (en || ten) expected++;
      // a glitch attempt while the clock is high must not reach the output
      @(posedge clk);
      #2 en = ~en;
      #1 en = ~en;
    end
    @(negedge clk);
    en = 0; ten = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (pulses != expected) begin
      failures++;
      $display("FAIL pulses %0d expected %0d", pulses, expected);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
