// tb_simd_dotp: all nine precision pairs (8/4/2 bit for each operand) with
// every chunk select, random operands and accumulators, against a reference
// that unpacks the signed elements itself; also checks that the mode is
// only changed by a status-register write.
module tb_simd_dotp;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we;
  logic [6:0] wdata, mode;
  logic [31:0] a, b, acc, res;
  int checks = 0, failures = 0;

  simd_dotp dut (.clk_i(clk), .rst_ni(rst_n), .csr_we_i(we), .csr_wdata_i(wdata),
    .mode_o(mode), .a_i(a), .b_i(b), .acc_i(acc), .res_o(res));

  function automatic int el(logic [31:0] w, int bits, int i);
    int v;
    v = int'((w >> (i * bits)) & ((1 << bits) - 1));
    if (v >= (1 << (bits - 1))) v -= (1 << bits);
    return v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bits [3] = '{8, 4, 2};
    we = 0; wdata = '0; a = '0; b = '0; acc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pa = 0; pa < 3; pa++)
      for (int pb = 0; pb < 3; pb++)
        for (int sel = 0; sel < 8; sel++) begin
          int ba, bb, wide, n, oa, ob;
          @(negedge clk);
          we = 1; wdata = 7'((sel << 4) | (pb << 2) | pa);
          @(negedge clk);
          we = 0; wdata = 7'h7f;                   // ignored without we
          @(negedge clk);
          checks++;
          if (mode != 7'((sel << 4) | (pb << 2) | pa)) failures++;
          ba = bits[pa]; bb = bits[pb];
          wide = (ba > bb) ? ba : bb;
          n = 32 / wide;
          oa = (ba < wide) ? (sel * n) % (32 / ba) : 0;
          ob = (bb < wide) ? (sel * n) % (32 / bb) : 0;
          for (int k = 0; k < 50; k++) begin
            int s;
            a = $urandom; b = $urandom; acc = $urandom;
            if (k == 0) begin a = 32'h80808080; b = 32'h80808080; end
            #1;
            s = int'(acc);
            for (int i = 0; i < n; i++) s += el(a, ba, oa + i) * el(b, bb, ob + i);
            checks++;
            if (res != 32'(s)) begin
              failures++;
              if (failures < 10) $display("FAIL pa=%0d pb=%0d sel=%0d a=%h b=%h: %h exp %h", pa, pb, sel, a, b, res, s);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
