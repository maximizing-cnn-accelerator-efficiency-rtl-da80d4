// tb_w_buf: self-checking test of the double-buffered weight buffer.
//
// Writes a distinct random word to every (half, tn, tm, address) through the per-column
// write ports, then reads each address of each half and checks that all TN x TM banks
// return their own word one cycle later, and that the two halves are independent.
module tb_w_buf;
  import clp_pkg::*;
  localparam int TN = 2, TM = 3, KMAX = 2, DEPTH = KMAX * KMAX, AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [TM-1:0] we;
  logic whalf, rhalf;
  logic [TM-1:0][0:0] wtn;
  logic [TM-1:0][AW-1:0] waddr;
  word_t [TM-1:0] wdata;
  logic [AW-1:0] raddr;
  word_t [TM-1:0][TN-1:0] rdata;
  word_t model [2][TM][TN][DEPTH];

  w_buf #(.TN(TN), .TM(TM), .KMAX(KMAX)) dut (.clk, .we, .whalf, .wtn, .waddr, .wdata, .rhalf,
                                              .raddr, .rdata);

  initial begin
    we = '0; whalf = 0; rhalf = 0; raddr = 0; wtn = '0; waddr = '0; wdata = '0;
    for (int h = 0; h < 2; h++)
      for (int n = 0; n < TN; n++)
        for (int a = 0; a < DEPTH; a++) begin
          @(negedge clk);
          whalf = 1'(h);
          for (int m = 0; m < TM; m++) begin
            we[m] = 1; wtn[m] = 1'(n); waddr[m] = AW'(a); wdata[m] = $urandom;
            model[h][m][n][a] = wdata[m];
          end
        end
    @(negedge clk);
    we = '0;
    for (int h = 0; h < 2; h++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        rhalf = 1'(h); raddr = AW'(a);
        @(posedge clk);
        #1;
        for (int m = 0; m < TM; m++)
          for (int n = 0; n < TN; n++) begin
            checks++;
            if (rdata[m][n] != model[h][m][n][a]) begin
              failures++;
              $display("FAIL: h%0d tm%0d tn%0d a%0d got %h expected %h", h, m, n, a,
                       rdata[m][n], model[h][m][n][a]);
            end
          end
      end
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
