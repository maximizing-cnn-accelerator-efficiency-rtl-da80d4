// tb_dot_product: self-checking test of the floating-point dot-product unit.
//
// A 5-wide unit (odd width, so the adder tree has an unpaired lane) is fed random vectors.
// Integer-valued operands make every float result exact, so those results must match,
// bit for bit, the integer dot product converted to float here. Random operands of mixed
// magnitude and sign are compared with a double-precision sum of the products (tolerance
// a few single-precision ulps of the sum of magnitudes). Masked lanes must not contribute,
// and the result must appear exactly one cycle after the inputs.
module tb_dot_product;
  import fp32_pkg::*;

  localparam int TN = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic valid, y_valid;
  fp32_t [TN-1:0] x, w;
  logic [TN-1:0] mask;
  fp32_t y;

  dot_product #(.TN(TN)) dut (.clk, .rst_n, .valid, .x, .w, .mask, .y, .y_valid);

  function automatic logic [31:0] i2f(input int v);
    int unsigned a;
    int p;
    if (v == 0) return 32'd0;
    a = (v < 0) ? -v : v;
    p = 0;
    for (int b = 0; b < 32; b++) if (a[b]) p = b;
    return {(v < 0), 8'(127 + p), 23'((a << (23 - p)) & 32'h7F_FFFF)};
  endfunction

  function automatic real f2r(input logic [31:0] f);
    real m;
    int e;
    if (f[30:23] == 0) return 0.0;
    m = real'({1'b1, f[22:0]});
    e = int'(f[30:23]) - 150;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] rnd_f();
    // sign random, exponent within +-20 of 1.0, random fraction
    return {1'($urandom), 8'(107 + $urandom % 40), 23'($urandom)};
  endfunction

  initial begin
    valid = 0; x = '0; w = '0; mask = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // exact integer tests
    for (int t = 0; t < 300; t++) begin
      int xi [TN], wi [TN], acc;
      acc = 0;
      @(negedge clk);
      valid = 1;
      mask = TN'($urandom);
      if (t < 20) mask = '1;
      for (int l = 0; l < TN; l++) begin
        xi[l] = int'($urandom % 201) - 100;
        wi[l] = int'($urandom % 201) - 100;
        x[l] = i2f(xi[l]);
        w[l] = i2f(wi[l]);
        if (mask[l]) acc += xi[l] * wi[l];
      end
      // a masked lane carrying garbage (an infinity) must be ignored
      for (int l = 0; l < TN; l++) if (!mask[l] && t % 3 == 0) x[l] = 32'h7F80_0000;
      @(posedge clk);
      #1;
      checks++;
      if (!y_valid || !(y == i2f(acc) || (y[30:0] == 0 && acc == 0))) begin
        failures++;
        if (failures < 10) $display("FAIL int: got %h expected %h (%0d)", y, i2f(acc), acc);
      end
    end
    // random real-valued tests
    for (int t = 0; t < 300; t++) begin
      real ref_v, mag;
      ref_v = 0.0; mag = 0.0;
      @(negedge clk);
      valid = 1;
      mask = '1;
      for (int l = 0; l < TN; l++) begin
        x[l] = rnd_f();
        w[l] = rnd_f();
        ref_v += f2r(x[l]) * f2r(w[l]);
        mag += (f2r(x[l]) * f2r(w[l]) < 0) ? -f2r(x[l]) * f2r(w[l]) : f2r(x[l]) * f2r(w[l]);
      end
      @(posedge clk);
      #1;
      checks++;
      if (!((f2r(y) - ref_v) <= mag * 8.0e-7 && (ref_v - f2r(y)) <= mag * 8.0e-7)) begin
        failures++;
        if (failures < 10) $display("FAIL real: got %g expected %g", f2r(y), ref_v);
      end
    end
    // latency: valid low -> y_valid low one cycle later
    @(negedge clk);
    valid = 0;
    @(posedge clk);
    #1;
    checks++;
    if (y_valid) begin failures++; $display("FAIL: y_valid did not follow valid"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
