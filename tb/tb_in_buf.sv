// tb_in_buf: self-checking test of the double-buffered input buffer.
//
// Fills both halves of all banks with random words through the per-bank write ports
// (several banks in the same cycle), then reads every address of one half while the other
// half is being overwritten, checking that the read data arrive one cycle after the address,
// that every bank returns its own word and that writing one half never disturbs the other.
module tb_in_buf;
  import clp_pkg::*;
  localparam int TN = 3, IN_SIZE = 20, AW = $clog2(IN_SIZE);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [TN-1:0] we;
  logic whalf, rhalf;
  logic [TN-1:0][AW-1:0] waddr;
  word_t [TN-1:0] wdata, rdata;
  logic [AW-1:0] raddr;
  word_t model [2][TN][IN_SIZE];

  in_buf #(.TN(TN), .IN_SIZE(IN_SIZE)) dut (.clk, .we, .whalf, .waddr, .wdata, .rhalf, .raddr, .rdata);

  task automatic fill(input logic h);
    for (int a = 0; a < IN_SIZE; a++) begin
      @(negedge clk);
      whalf = h;
      for (int b = 0; b < TN; b++) begin
        we[b] = 1; waddr[b] = AW'((a + b) % IN_SIZE); wdata[b] = $urandom;
        model[h][b][(a + b) % IN_SIZE] = wdata[b];
      end
    end
    @(negedge clk);
    we = '0;
  endtask

  initial begin
    we = '0; whalf = 0; rhalf = 0; raddr = 0; waddr = '0; wdata = '0;
    fill(0);
    fill(1);
    // read half 0 while rewriting half 1
    for (int a = 0; a < IN_SIZE; a++) begin
      @(negedge clk);
      rhalf = 0; raddr = AW'(a);
      whalf = 1;
      for (int b = 0; b < TN; b++) begin
        we[b] = 1; waddr[b] = AW'(a); wdata[b] = $urandom; model[1][b][a] = wdata[b];
      end
      @(posedge clk);
      #1;
      for (int b = 0; b < TN; b++) begin
        checks++;
        if (rdata[b] != model[0][b][a]) begin
          failures++;
          $display("FAIL: half0 bank%0d addr%0d got %h expected %h", b, a, rdata[b], model[0][b][a]);
        end
      end
    end
    @(negedge clk);
    we = '0;
    for (int a = 0; a < IN_SIZE; a++) begin
      @(negedge clk);
      rhalf = 1; raddr = AW'(a);
      @(posedge clk);
      #1;
      for (int b = 0; b < TN; b++) begin
        checks++;
        if (rdata[b] != model[1][b][a]) begin
          failures++;
          $display("FAIL: half1 bank%0d addr%0d got %h expected %h", b, a, rdata[b], model[1][b][a]);
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
