// mem_model: behavioural model of the off-chip memory behind the CLP transfer ports.
//
// Not synthesizable. It stands for the DRAM, its controller, the AXI crossbar and the data
// movers that the accelerator relies on but does not contain. It serves NRD read channels
// and NWR write channels, each a command (byte address, length in words) followed by a
// stream of 32-bit words. With STALL=1 each channel randomly withholds valid/ready to test
// back-pressure. The word array mem[] is read and written directly by testbenches.
module mem_model
  import clp_pkg::*;
#(
  parameter int NRD       = 1,
  parameter int NWR       = 1,
  parameter int MEM_WORDS = 65536,
  parameter bit STALL     = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  dm_cmd_t [NRD-1:0]    rd_cmd,
  input  logic [NRD-1:0]       rd_cmd_valid,
  output logic [NRD-1:0]       rd_cmd_ready,
  output word_t [NRD-1:0]      rd_data,
  output logic [NRD-1:0]       rd_valid,
  input  logic [NRD-1:0]       rd_ready,
  input  dm_cmd_t [NWR-1:0]    wr_cmd,
  input  logic [NWR-1:0]       wr_cmd_valid,
  output logic [NWR-1:0]       wr_cmd_ready,
  input  word_t [NWR-1:0]      wr_data,
  input  logic [NWR-1:0]       wr_valid,
  output logic [NWR-1:0]       wr_ready
);

  word_t mem [MEM_WORDS];

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    logic        act;
    int unsigned a, left;
    logic        go;
    assign rd_cmd_ready[p] = !act && rst_n;
    assign rd_valid[p]     = act && go;
    assign rd_data[p]      = mem[a % MEM_WORDS];
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        act <= 1'b0; a <= 0; left <= 0; go <= 1'b0;
      end else begin
        go <= STALL ? ($urandom % 4 != 0) : 1'b1;
        if (!act && rd_cmd_valid[p]) begin
          act  <= (rd_cmd[p].len != 0);
          a    <= rd_cmd[p].addr / 4;
          left <= rd_cmd[p].len;
        end else if (act && go && rd_ready[p]) begin
          a <= a + 1;
          left <= left - 1;
          if (left == 1) act <= 1'b0;
        end
      end
  end

  for (genvar p = 0; p < NWR; p++) begin : g_wr
    logic        act;
    int unsigned a, left;
    logic        go;
    assign wr_cmd_ready[p] = !act && rst_n;
    assign wr_ready[p]     = act && go;
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        act <= 1'b0; a <= 0; left <= 0; go <= 1'b0;
      end else begin
        go <= STALL ? ($urandom % 4 != 0) : 1'b1;
        if (!act && wr_cmd_valid[p]) begin
          act  <= (wr_cmd[p].len != 0);
          a    <= wr_cmd[p].addr / 4;
          left <= wr_cmd[p].len;
        end else if (act && go && wr_valid[p]) begin
          mem[a % MEM_WORDS] <= wr_data[p];
          a <= a + 1;
          left <= left - 1;
          if (left == 1) act <= 1'b0;
        end
      end
  end

endmodule
