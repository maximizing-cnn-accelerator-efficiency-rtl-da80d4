// bias_buf: bias words of the current layer, one per output map.
//
// The whole bias vector of a layer (M <= MMAX words) is loaded once after the descriptor.
// It is stored as MMAX/TM rows of TM words so that the compute module can read the TM biases
// of output-map group m/TM in one cycle (read data registered, one cycle latency). Word k is
// written to row k/TM, lane k%TM; the writer supplies row and lane, so no divider is needed.
// The source names the bias buffer and its size parameter Mmax, partitioned across banks;
// loading it once per layer is this design's choice.
module bias_buf
  import clp_pkg::*;
#(
  parameter int TM   = 64,
  parameter int MMAX = 192,
  localparam int ROWS = (MMAX + TM - 1) / TM,
  localparam int RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int LW   = (TM > 1) ? $clog2(TM) : 1
) (
  input  logic              clk,
  input  logic              we,
  input  logic [RW-1:0]     wrow,
  input  logic [LW-1:0]     wlane,
  input  word_t             wdata,
  input  logic [RW-1:0]     rrow,
  output word_t [TM-1:0]    rdata
);

  for (genvar l = 0; l < TM; l++) begin : g_lane
    word_t mem [ROWS];
    always_ff @(posedge clk) begin
      if (we && wlane == LW'(l)) mem[wrow] <= wdata;
      rdata[l] <= mem[rrow];
    end
  end

endmodule
