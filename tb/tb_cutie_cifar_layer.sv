// tb_cutie_cifar_layer: CUTIE on two 3x3 ternary layers over a 32x32
// feature map, the map size of a CIFAR-10 image, through the APB port.
// Same procedure and reference model as tb_cutie: compressed random kernels
// and normalisation parameters, a random input map, layer 0 then layer 1 on
// its output (ping-pong between three regions of the activation memory),
// every output pixel compared with a reference convolution, and the layer
// time checked against N_OCU + 5 + 33*33 cycles. The channel count is cut
// to 8 so that the testbench's own reference model stays short; the
// 96-channel datapath is exercised by the SoC testbench.
module tb_cutie_cifar_layer
  import kraken_pkg::*;
;
  localparam int NO = 8;
  localparam int W  = 32;
  localparam int H  = 32;
  localparam int NW = 9 * NO, WBYTES = (NW + 4) / 5, WBITS = 8 * WBYTES;
  localparam int SW = (WBITS + 31) / 32, AW32 = (2 * NO + 31) / 32;
  localparam int IN_B = 0, MID_B = W * H, OUT_B = 2 * W * H;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  logic busy, done;
  int checks = 0, failures = 0;

  cutie #(.N_OCU(NO), .ADEPTH(4 * W * H), .WDEPTH(4 * NO), .MAX_W(W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .apb_req_i(apb_req), .apb_rsp_o(apb_rsp),
    .busy_o(busy), .done_o(done));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic apb_wr(logic [31:0] a, logic [31:0] d);
    @(negedge clk) apb_req = '{psel: 1, penable: 0, pwrite: 1, paddr: a, pwdata: d};
    @(negedge clk) apb_req.penable = 1;
    @(negedge clk) apb_req = '0;
  endtask

  task automatic apb_rd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk) apb_req = '{psel: 1, penable: 0, pwrite: 0, paddr: a, pwdata: 0};
    @(negedge clk) apb_req.penable = 1;
    d = apb_rsp.prdata;
    @(negedge clk) apb_req = '0;
  endtask

  int wt [2][NO][NW];           // [layer][ocu][(ky*3+kx)*NO + c]
  int sc [2][NO], bi [2][NO], th [2][NO];
  int fm [3][H][W][NO];         // input, layer-0 output, layer-1 output

  function automatic logic [1:0] enc(int v);
    return (v == 1) ? 2'b01 : (v == -1) ? 2'b11 : 2'b00;
  endfunction

  task automatic stage_clear();
    apb_wr(32'h40, 0);
    for (int i = 0; i < SW; i++) apb_wr(32'h44, 0);
    apb_wr(32'h40, 0);
  endtask

  task automatic write_pixel(int addr, int l, int y, int x);
    logic [AW32*32-1:0] v;
    v = '0;
    for (int c = 0; c < NO; c++) v[2*c +: 2] = enc(fm[l][y][x][c]);
    apb_wr(32'h40, 0);
    for (int i = 0; i < AW32; i++) apb_wr(32'h44, v[32*i +: 32]);
    apb_wr(32'h4C, addr);
  endtask

  task automatic run_layer(int layer, int inb, int outb);
    logic [31:0] cyc;
    int t0, t1;
    apb_wr(32'h08, layer); apb_wr(32'h0C, W); apb_wr(32'h10, H);
    apb_wr(32'h14, inb);   apb_wr(32'h18, outb);
    @(negedge clk) apb_req = '{psel: 1, penable: 0, pwrite: 1, paddr: 0, pwdata: 1};
    @(negedge clk) apb_req.penable = 1;
    @(posedge clk) t0 = $time;
    @(negedge clk) apb_req = '0;
    while (!done) @(posedge clk);
    t1 = $time;
    apb_rd(32'h1C, cyc);
    check(int'(cyc) == NO + 5 + (W+1)*(H+1), $sformatf("layer cycles %0d exp %0d", cyc, NO + 5 + (W+1)*(H+1)));
    check((t1 - t0) / 10 == NO + 5 + (W+1)*(H+1), $sformatf("wall cycles %0d", (t1 - t0) / 10));
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    apb_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // kernels, compressed five trits per byte
    for (int l = 0; l < 2; l++)
      for (int o = 0; o < NO; o++) begin
        logic [SW*32-1:0] wv;
        wv = '0;
        for (int i = 0; i < NW; i++) wt[l][o][i] = int'($urandom % 3) - 1;
        for (int b = 0; b < WBYTES; b++) begin
          int v;
          v = 0;
          for (int j = 4; j >= 0; j--) v = v * 3 + ((5*b + j < NW) ? wt[l][o][5*b + j] + 1 : 1);
          wv[8*b +: 8] = 8'(v);
        end
        apb_wr(32'h40, 0);
        for (int i = 0; i < SW; i++) apb_wr(32'h44, wv[32*i +: 32]);
        apb_wr(32'h48, l * NO + o);
        sc[l][o] = int'($urandom % 8) - 2; bi[l][o] = int'($urandom % 20) - 10; th[l][o] = $urandom % 12;
        apb_wr(32'h40, 0);
        apb_wr(32'h44, {8'(bi[l][o] >> 8), 8'(bi[l][o]), 8'(sc[l][o]), 8'h0} >> 8 |
                        (32'(th[l][o]) << 24));
        apb_wr(32'h44, 32'(th[l][o]) >> 8);
        apb_wr(32'h54, l * NO + o);
      end
    // input map
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        for (int c = 0; c < NO; c++) fm[0][y][x][c] = int'($urandom % 3) - 1;
        write_pixel(IN_B + y * W + x, 0, y, x);
      end
    // reference
    for (int l = 0; l < 2; l++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int o = 0; o < NO; o++) begin
            int a, yv;
            a = 0;
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                for (int c = 0; c < NO; c++) begin
                  int yy, xx;
                  yy = y + ky - 1; xx = x + kx - 1;
                  if (yy >= 0 && yy < H && xx >= 0 && xx < W)
                    a += wt[l][o][(ky*3+kx)*NO + c] * fm[l][yy][xx][c];
                end
            yv = a * sc[l][o] + bi[l][o];
            fm[l+1][y][x][o] = (yv > th[l][o]) ? 1 : (yv < -th[l][o]) ? -1 : 0;
          end
    run_layer(0, IN_B, MID_B);
    run_layer(1, MID_B, OUT_B);
    for (int l = 1; l <= 2; l++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          logic [AW32*32-1:0] v;
          apb_wr(32'h50, (l == 1 ? MID_B : OUT_B) + y * W + x);
          apb_wr(32'h40, 0);
          for (int i = 0; i < AW32; i++) begin
            apb_rd(32'h44, d);
            v[32*i +: 32] = d;
            apb_wr(32'h40, i + 1);
          end
          for (int c = 0; c < NO; c++)
            check(v[2*c +: 2] == enc(fm[l][y][x][c]),
                  $sformatf("layer %0d pixel (%0d,%0d) ch %0d", l - 1, x, y, c));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
