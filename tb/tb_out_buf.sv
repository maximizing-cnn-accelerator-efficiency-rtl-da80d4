// tb_out_buf: self-checking test of the output buffer and its accumulation adders.
//
// Random accumulate requests (integer-valued floats, so sums are exact) go to random
// addresses of both halves, including runs of requests to the same word in consecutive
// cycles (exercising the read-after-write bypass) and first-pass requests that must start
// from the bias. A per-bank integer model predicts every word. The words are then read back
// through both read ports, including cycles with rd_en low, where the read data must hold.
module tb_out_buf;
  import clp_pkg::*;
  import fp32_pkg::*;
  localparam int TM = 3, OUT_SIZE = 8, MP = 2, AW = $clog2(OUT_SIZE), MW = $clog2(TM);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic acc_en, acc_half, acc_init;
  logic [AW-1:0] acc_addr;
  fp32_t [TM-1:0] dot, bias;
  logic [MP-1:0] rd_en, rd_half;
  logic [MP-1:0][MW-1:0] rd_bank;
  logic [MP-1:0][AW-1:0] rd_addr;
  word_t [MP-1:0] rd_data;
  int model [2][TM][OUT_SIZE];
  int n_byp = 0;

  out_buf #(.TM(TM), .OUT_SIZE(OUT_SIZE), .MP(MP)) dut (.clk, .rst_n, .acc_en, .acc_half,
    .acc_addr, .acc_init, .dot, .bias, .rd_en, .rd_half, .rd_bank, .rd_addr, .rd_data);

  function automatic logic [31:0] i2f(input int v);
    int unsigned a;
    int p;
    if (v == 0) return 32'd0;
    a = (v < 0) ? -v : v;
    p = 0;
    for (int b = 0; b < 32; b++) if (a[b]) p = b;
    return {(v < 0), 8'(127 + p), 23'((a << (23 - p)) & 32'h7F_FFFF)};
  endfunction

  initial begin
    int last_a, last_h;
    acc_en = 0; acc_half = 0; acc_init = 0; acc_addr = 0; dot = '0; bias = '0;
    rd_en = '0; rd_half = '0; rd_bank = '0; rd_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise every word with a bias pass
    for (int h = 0; h < 2; h++)
      for (int a = 0; a < OUT_SIZE; a++) begin
        @(negedge clk);
        acc_en = 1; acc_half = 1'(h); acc_addr = AW'(a); acc_init = 1;
        for (int m = 0; m < TM; m++) begin
          int bv, dv;
          bv = int'($urandom % 21) - 10; dv = int'($urandom % 21) - 10;
          bias[m] = i2f(bv); dot[m] = i2f(dv);
          model[h][m][a] = bv + dv;
        end
      end
    last_a = -1; last_h = -1;
    for (int t = 0; t < 400; t++) begin
      int a, h;
      @(negedge clk);
      h = int'($urandom % 2);
      a = ($urandom % 3 == 0 && last_a >= 0) ? last_a : int'($urandom % OUT_SIZE);
      if ($urandom % 3 == 0 && last_a >= 0) h = last_h;
      if (a == last_a && h == last_h) n_byp++;
      acc_en = ($urandom % 5 != 0); acc_half = 1'(h); acc_addr = AW'(a);
      acc_init = ($urandom % 10 == 0);
      for (int m = 0; m < TM; m++) begin
        int bv, dv;
        bv = int'($urandom % 21) - 10; dv = int'($urandom % 21) - 10;
        bias[m] = i2f(bv); dot[m] = i2f(dv);
        if (acc_en) model[h][m][a] = (acc_init ? bv : model[h][m][a]) + dv;
      end
      if (acc_en) begin last_a = a; last_h = h; end else begin last_a = -1; end
    end
    @(negedge clk);
    acc_en = 0;
    repeat (3) @(negedge clk);
    // read back through both ports
    for (int h = 0; h < 2; h++)
      for (int m = 0; m < TM; m++)
        for (int a = 0; a < OUT_SIZE; a++) begin
          @(negedge clk);
          rd_en = '1;
          rd_half = {1'(h), 1'(h)};
          rd_bank[0] = MW'(m); rd_addr[0] = AW'(a);
          rd_bank[1] = MW'(m); rd_addr[1] = AW'(OUT_SIZE - 1 - a);
          @(negedge clk);
          rd_en = '0;
          rd_addr = '0;
          @(negedge clk);   // data must hold while rd_en is low
          checks += 2;
          if (rd_data[0] != i2f(model[h][m][a]) &&
              !(rd_data[0][30:0] == 0 && model[h][m][a] == 0)) begin
            failures++;
            $display("FAIL: p0 h%0d m%0d a%0d got %h expected %h", h, m, a, rd_data[0],
                     i2f(model[h][m][a]));
          end
          if (rd_data[1] != i2f(model[h][m][OUT_SIZE - 1 - a]) &&
              !(rd_data[1][30:0] == 0 && model[h][m][OUT_SIZE - 1 - a] == 0)) begin
            failures++;
            $display("FAIL: p1 h%0d m%0d a%0d got %h", h, m, OUT_SIZE - 1 - a, rd_data[1]);
          end
        end
    checks++;
    if (n_byp == 0) begin failures++; $display("FAIL: bypass never exercised"); end
    $display("back-to-back same-word requests: %0d", n_byp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
