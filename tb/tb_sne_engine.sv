// tb_sne_engine: one engine on a small map (8x8, 2 local channels, 4 input
// channels) against a reference model of the event-driven convolution.
// Checks every output spike (order and coordinates), the SOP count, the
// burst length of 1 + 9 * 2**LCHW cycles per event when the output is never
// stalled, and correctness under random output back-pressure.
module tb_sne_engine;
  localparam int XW = 3, YW = 3, LCHW = 1, CINW = 2, COUTW = 3, ID = 2;
  localparam int NL = 2**LCHW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, evt_valid, evt_ready, out_valid, out_ready, busy;
  logic [7:0] alpha;
  logic signed [7:0] theta;
  logic [CINW-1:0] cin;
  logic [YW-1:0] ey, oy;
  logic [XW-1:0] ex, ox;
  logic [COUTW+CINW-1:0] waddr;
  logic [35:0] kernel;
  logic [COUTW-1:0] och;
  logic [31:0] sops;
  logic [35:0] wmem [2**(COUTW+CINW)];
  assign kernel = wmem[waddr];

  sne_engine #(.ENGINE_ID(ID), .XW(XW), .YW(YW), .LCHW(LCHW), .CINW(CINW), .COUTW(COUTW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .alpha_i(alpha), .theta_i(theta),
    .evt_valid_i(evt_valid), .evt_ready_o(evt_ready), .evt_cin_i(cin), .evt_y_i(ey), .evt_x_i(ex),
    .w_addr_o(waddr), .w_kernel_i(kernel), .out_valid_o(out_valid), .out_ready_i(out_ready),
    .out_ch_o(och), .out_y_o(oy), .out_x_o(ox), .busy_o(busy), .sop_count_o(sops));

  int checks = 0, failures = 0;
  int st [NL][2**YW][2**XW];
  int exp_q[$];
  int exp_sops = 0;
  bit stall_mode = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int wt(int lc, int c, int ky, int kx);
    logic [35:0] k;
    k = wmem[((ID*NL + lc) << CINW) | c];
    return int'($signed(k[(ky*3+kx)*4 +: 4]));
  endfunction

  task automatic model_event(int c, int y, int x);
    for (int lc = 0; lc < NL; lc++)
      for (int ky = 0; ky < 3; ky++)
        for (int kx = 0; kx < 3; kx++) begin
          int ty, tx, p, lk, s;
          ty = y - ky + 1; tx = x - kx + 1;
          if (ty < 0 || ty >= 2**YW || tx < 0 || tx >= 2**XW) continue;
          exp_sops++;
          p = st[lc][ty][tx] * int'(alpha);
          lk = (p >= 0) ? p / 256 : -((-p + 255) / 256);
          s = lk + wt(lc, c, ky, kx);
          if (s > 127) s = 127;
          if (s < -128) s = -128;
          if (s >= int'(theta)) begin
            st[lc][ty][tx] = 0;
            exp_q.push_back(((ID*NL + lc) << (XW+YW)) | (ty << XW) | tx);
          end else st[lc][ty][tx] = s;
        end
  endtask

  // output monitor
  always @(posedge clk) if (rst_n) begin
    if (stall_mode) out_ready <= 1'($urandom);
    else out_ready <= 1'b1;
    if (out_valid && out_ready) begin
      int got;
      got = (int'(och) << (XW+YW)) | (int'(oy) << XW) | int'(ox);
      if (exp_q.size() == 0) check(0, "unexpected spike");
      else begin
        int e;
        e = exp_q.pop_front();
        check(got == e, $sformatf("spike got %0h exp %0h", got, e));
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; evt_valid = 0; out_ready = 1; alpha = 8'd230; theta = 8'sd12;
    cin = '0; ey = '0; ex = '0;
    foreach (wmem[i]) wmem[i] = {$urandom, $urandom};
    foreach (st[a, b, c]) st[a][b][c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); clear <= 1; @(posedge clk); clear <= 0;
    wait (!busy); @(posedge clk);
    for (int phase = 0; phase < 2; phase++) begin
      stall_mode = (phase == 1);
      for (int n = 0; n < 60; n++) begin
        int c, y, x, t0, t1;
        c = $urandom % 2**CINW; y = $urandom % 2**YW; x = $urandom % 2**XW;
        if (n == 0) begin y = 0; x = 0; end           // corner: many taps skipped
        model_event(c, y, x);
        evt_valid <= 1; cin <= CINW'(c); ey <= YW'(y); ex <= XW'(x);
        @(posedge clk);
        while (!evt_ready) @(posedge clk);
        t0 = $time;
        evt_valid <= 0;
        @(posedge clk);
        while (busy) @(posedge clk);
        t1 = $time;
        if (!stall_mode)
          check((t1 - t0) / 10 == 1 + 9 * NL, $sformatf("burst took %0d cycles", (t1 - t0) / 10));
      end
    end
    repeat (5) @(posedge clk);
    check(exp_q.size() == 0, "spikes missing");
    check(sops == 32'(exp_sops), $sformatf("sops %0d exp %0d", sops, exp_sops));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
