// w_buf: the CLP weight buffer, TN x TM banks, each double-buffered (ping-pong).
//
// Bank (tn, tm) holds the K x K filter that connects input map n+tn to output map m+tm,
// row-major at address i*K+j, at most KMAX*KMAX words per half. As with the input buffer,
// the transfer engines fill one half while the compute module reads the other. Each
// output-map column tm has its own write port (one word per cycle into bank (wtn, tm)), so
// several weight ports can load different columns at once. In a read
// cycle every bank is read at the same address (i*K+j), giving the TN weights of each of the
// TM dot-product units. Read data is registered (one cycle latency).
// Bank count, bank size and double buffering follow the source design.
module w_buf
  import clp_pkg::*;
#(
  parameter int TN   = 2,
  parameter int TM   = 64,
  parameter int KMAX = 3,
  localparam int DEPTH = KMAX * KMAX,
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int NW    = (TN > 1) ? $clog2(TN) : 1
) (
  input  logic                      clk,
  input  logic [TM-1:0]             we,
  input  logic                      whalf,
  input  logic [TM-1:0][NW-1:0]     wtn,
  input  logic [TM-1:0][AW-1:0]     waddr,
  input  word_t [TM-1:0]            wdata,
  input  logic                      rhalf,
  input  logic [AW-1:0]             raddr,
  output word_t [TM-1:0][TN-1:0]    rdata
);

  for (genvar m = 0; m < TM; m++) begin : g_m
    for (genvar n = 0; n < TN; n++) begin : g_n
      word_t mem [2][DEPTH];
      always_ff @(posedge clk) begin
        if (we[m] && wtn[m] == NW'(n)) mem[whalf][waddr[m]] <= wdata[m];
        rdata[m][n] <= mem[rhalf][raddr];
      end
    end
  end

endmodule
