// in_buf: the CLP input buffer, TN banks, each double-buffered (ping-pong).
//
// Bank tn holds the input-tile rows of input map n+tn: ((Tr-1)*S+K) x ((Tc-1)*S+K) words,
// row-major, at most IN_SIZE words per half. The transfer engine fills one half (whalf)
// while the compute module reads the other (rhalf), so loading the next tile overlaps
// computing the current one. Each bank is a simple dual-port memory: its own write port
// (so several transfer ports can fill different banks at once) and a read port whose address
// is shared by all banks, so all TN banks deliver a word in the same cycle.
// Read timing: rdata is registered, valid one cycle after raddr/rhalf are presented.
// Banking and double buffering follow the source design; the flat half/address layout is
// this implementation's choice.
module in_buf
  import clp_pkg::*;
#(
  parameter int TN      = 2,
  parameter int IN_SIZE = 225,
  localparam int AW     = (IN_SIZE > 1) ? $clog2(IN_SIZE) : 1
) (
  input  logic                  clk,
  // write port (transfer engine)
  input  logic [TN-1:0]         we,
  input  logic                  whalf,
  input  logic [TN-1:0][AW-1:0] waddr,
  input  word_t [TN-1:0]        wdata,
  // read port (compute module)
  input  logic                  rhalf,
  input  logic [AW-1:0]         raddr,
  output word_t [TN-1:0]        rdata
);

  for (genvar b = 0; b < TN; b++) begin : g_bank
    word_t mem [2][IN_SIZE];
    always_ff @(posedge clk) begin
      if (we[b]) mem[whalf][waddr[b]] <= wdata[b];
      rdata[b] <= mem[rhalf][raddr];
    end
  end

endmodule
