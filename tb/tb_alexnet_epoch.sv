// tb_alexnet_epoch: one full-size AlexNet epoch on the four CLP shapes of the default build.
//
// Each of the four CLPs of the default configuration runs its full-size AlexNet layers
// (one of the two groups of each layer). All four start together, as in an epoch:
//   CLP0 (Tn=2, Tm=64):  layer 4 (N=192, M=192) then layer 5 (N=192, M=128), 13x13, K=3
//   CLP1 (Tn=1, Tm=96):  layer 3 (N=256, M=192), 13x13, K=3
//   CLP2 (Tn=3, Tm=24):  layer 1 (N=3, M=48), 55x55, K=11, S=4, tiles 14x19
//   CLP3 (Tn=8, Tm=19):  layer 2 (N=48, M=128), 27x27, K=5, tiles 14x27
// Each CLP has the buffer sizes of the default build. Every output word of every layer is
// checked against an integer reference convolution. Each layer's compute cycles must equal
// R*C*ceil(N/Tn)*ceil(M/Tm)*K*K and the expected per-layer count below. The per-CLP totals
// are 730080, 778752, 732050 and 765450 cycles. The epoch is set by the slowest CLP, and the
// test checks that the four CLPs finish within 7 % of each other in clock cycles.
// Layer sizes are AlexNet's; tile sizes and cycle counts are those of the partition.
module tb_alexnet_epoch;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0] fin;
  int         ck [4], fl [4];
  int         checks = 0, failures = 0;
  longint     t_fin [4];

  clp_layer_runner #(.TN(2), .TM(64), .KMAX(3), .MMAX(192), .IN_SIZE(225), .OUT_SIZE(169),
    .MEM_WORDS(524288), .NL(2),
    .L_R('{13, 13}), .L_C('{13, 13}), .L_M('{192, 128}), .L_N('{192, 192}), .L_K('{3, 3}),
    .L_S('{1, 1}), .L_TR('{13, 13}), .L_TC('{13, 13}), .L_CYC('{438048, 292032}))
  u_clp0 (.clk, .rst_n, .finished(fin[0]), .checks(ck[0]), .failures(fl[0]));

  clp_layer_runner #(.TN(1), .TM(96), .KMAX(3), .MMAX(192), .IN_SIZE(225), .OUT_SIZE(169),
    .MEM_WORDS(1048576), .NL(1),
    .L_R('{13, 13}), .L_C('{13, 13}), .L_M('{192, 192}), .L_N('{256, 256}), .L_K('{3, 3}), .L_S('{1, 1}),
    .L_TR('{13, 13}), .L_TC('{13, 13}), .L_CYC('{778752, 778752}))
  u_clp1 (.clk, .rst_n, .finished(fin[1]), .checks(ck[1]), .failures(fl[1]));

  clp_layer_runner #(.TN(3), .TM(24), .KMAX(11), .MMAX(48), .IN_SIZE(5229), .OUT_SIZE(266),
    .MEM_WORDS(524288), .NL(1),
    .L_R('{55, 55}), .L_C('{55, 55}), .L_M('{48, 48}), .L_N('{3, 3}), .L_K('{11, 11}), .L_S('{4, 4}),
    .L_TR('{14, 14}), .L_TC('{19, 19}), .L_CYC('{732050, 732050}))
  u_clp2 (.clk, .rst_n, .finished(fin[2]), .checks(ck[2]), .failures(fl[2]));

  clp_layer_runner #(.TN(8), .TM(19), .KMAX(5), .MMAX(128), .IN_SIZE(558), .OUT_SIZE(378),
    .MEM_WORDS(524288), .NL(1),
    .L_R('{27, 27}), .L_C('{27, 27}), .L_M('{128, 128}), .L_N('{48, 48}), .L_K('{5, 5}), .L_S('{1, 1}),
    .L_TR('{14, 14}), .L_TC('{27, 27}), .L_CYC('{765450, 765450}))
  u_clp3 (.clk, .rst_n, .finished(fin[3]), .checks(ck[3]), .failures(fl[3]));

  longint cyc = 0;
  always @(posedge clk) cyc++;
  for (genvar i = 0; i < 4; i++) begin : g_t
    initial begin
      wait (fin[i]);
      t_fin[i] = cyc;
    end
  end

  initial begin
    longint tmin, tmax;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&fin);
    @(posedge clk);
    for (int i = 0; i < 4; i++) begin
      checks += ck[i];
      failures += fl[i];
      $display("CLP%0d finished after %0d cycles", i, t_fin[i]);
    end
    tmin = t_fin[0]; tmax = t_fin[0];
    for (int i = 1; i < 4; i++) begin
      if (t_fin[i] < tmin) tmin = t_fin[i];
      if (t_fin[i] > tmax) tmax = t_fin[i];
    end
    checks++;
    if ((tmax - tmin) * 100 > tmax * 7) begin
      failures++;
      $display("FAIL: CLPs unbalanced, %0d to %0d cycles", tmin, tmax);
    end
    $display("epoch length %0d cycles", tmax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1200000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
