// fp32_pkg: IEEE-754 single-precision multiply and add for the CLP arithmetic units.
//
// The accelerator computes in 32-bit floating point, as in its main AlexNet configuration,
// where each multiplier and each adder is an independent floating-point unit. The two
// functions here are combinational: fp_mul rounds the 48-bit significand product, fp_add
// aligns, adds or subtracts, renormalises and rounds. Both round to nearest, ties to even.
// Simplifications chosen by this design (the source only names the data type): subnormal
// inputs and results are flushed to zero, an exponent of 255 is treated as infinity (no
// NaN propagation), and exact cancellation returns +0.
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [47:0] p;
    logic [23:0] mant;
    logic        g, st;
    logic signed [10:0] e;
    logic [24:0] mr;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    if (ea == 8'd0 || eb == 8'd0) return {s, 31'd0};
    if (ea == 8'hFF || eb == 8'hFF) return {s, 8'hFF, 23'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'(ea) + 11'(eb) - 11'sd127;
    if (p[47]) begin
      mant = p[47:24]; g = p[23]; st = |p[22:0]; e = e + 11'sd1;
    end else begin
      mant = p[46:23]; g = p[22]; st = |p[21:0];
    end
    mr = {1'b0, mant} + 25'((g && (st || mant[0])) ? 1 : 0);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end
    if (e >= 11'sd255) return {s, 8'hFF, 23'd0};
    if (e <= 11'sd0) return {s, 31'd0};
    return {s, e[7:0], mr[22:0]};
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [7:0]  d8;
    int unsigned d;
    logic [26:0] mx, my, sh;
    logic        st;
    logic [27:0] sum;
    logic [26:0] n;
    logic signed [10:0] e;
    logic [24:0] mr;
    int          lz;
    if (a[30:23] == 8'd0 && b[30:23] == 8'd0) return FP_ZERO;
    if (a[30:23] == 8'd0) return b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    // x has the larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    d8 = x[30:23] - y[30:23];
    d  = int'(d8);
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    if (d >= 27) begin
      sh = 27'd1;
    end else begin
      sh = my >> d;
      st = 1'b0;
      for (int k = 0; k < 27; k++) if (k < d && my[k]) st = 1'b1;
      sh[0] = sh[0] | st;
    end
    e = 11'(x[30:23]);
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, sh};
      if (sum[27]) begin
        n = sum[27:1];
        n[0] = n[0] | sum[0];
        e = e + 11'sd1;
      end else begin
        n = sum[26:0];
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, sh};
      if (sum == 28'd0) return FP_ZERO;
      lz = 0;
      for (int k = 26; k >= 0; k--) begin
        if (sum[k]) break;
        lz++;
      end
      n = sum[26:0] << lz;
      e = e - 11'(lz);
    end
    mr = {1'b0, n[26:3]} + 25'((n[2] && ((|n[1:0]) || n[3])) ? 1 : 0);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end
    if (e >= 11'sd255) return {x[31], 8'hFF, 23'd0};
    if (e <= 11'sd0) return {x[31], 31'd0};
    return {x[31], e[7:0], mr[22:0]};
  endfunction

endpackage
