// out_buf: the CLP output buffer with its accumulation adders, TM banks, double-buffered.
//
// Bank tm holds the Tr x Tc output tile of output map m+tm (address tr*cloops+tc, at most
// OUT_SIZE words per half). Behind each dot-product unit sits one floating-point adder that
// adds the unit's result to the partial sum read from the bank and writes it back, so the
// bank accumulates over the K x K filter positions and over the input-map groups of a tile.
// On the first contribution to a word (acc_init) the adder starts from the bias instead of
// the stored value. The compute module fills one half while the write-out engines drain the
// other half to memory, through MP independent read ports.
//
// Timing: an accumulate request (acc_en, acc_half, acc_addr, acc_init, dot, bias) is taken
// in cycle t; the bank is read in t and the sum is written at the end of t+1. A request to
// the same word in the very next cycle takes the sum just computed (one-deep bypass), so any
// issue order is safe. Read ports: rd_data is registered and updates only when rd_en is 1.
// Banks, accumulation adder and double buffering follow the source design; the bypass and
// the bias-on-first-pass rule are this implementation's choices.
module out_buf
  import clp_pkg::*;
  import fp32_pkg::*;
#(
  parameter int TM       = 64,
  parameter int OUT_SIZE = 169,
  parameter int MP       = 1,
  localparam int AW      = (OUT_SIZE > 1) ? $clog2(OUT_SIZE) : 1,
  localparam int MW      = (TM > 1) ? $clog2(TM) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // accumulate port (compute module)
  input  logic                   acc_en,
  input  logic                   acc_half,
  input  logic [AW-1:0]          acc_addr,
  input  logic                   acc_init,
  input  fp32_t [TM-1:0]         dot,
  input  fp32_t [TM-1:0]         bias,
  // read ports (write-out engines)
  input  logic [MP-1:0]          rd_en,
  input  logic [MP-1:0]          rd_half,
  input  logic [MP-1:0][MW-1:0]  rd_bank,
  input  logic [MP-1:0][AW-1:0]  rd_addr,
  output word_t [MP-1:0]         rd_data
);

  logic                 s1_en, s1_half, s1_init;
  logic [AW-1:0]        s1_addr;
  fp32_t [TM-1:0]       s1_dot, s1_bias, s1_old, s1_sum, last_sum;
  logic                 last_en, last_half;
  logic [AW-1:0]        last_addr;
  logic                 byp;
  word_t [MP-1:0][TM-1:0] rd_lane;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      s1_en   <= 1'b0;
      last_en <= 1'b0;
    end else begin
      s1_en   <= acc_en;
      last_en <= s1_en;
    end

  always_ff @(posedge clk) begin
    s1_half   <= acc_half;
    s1_addr   <= acc_addr;
    s1_init   <= acc_init;
    s1_dot    <= dot;
    s1_bias   <= bias;
    last_half <= s1_half;
    last_addr <= s1_addr;
    last_sum  <= s1_sum;
  end

  assign byp = last_en && (last_half == s1_half) && (last_addr == s1_addr);

  for (genvar b = 0; b < TM; b++) begin : g_bank
    fp32_t mem [2][OUT_SIZE];
    fp32_t base;
    assign base      = s1_init ? s1_bias[b] : (byp ? last_sum[b] : s1_old[b]);
    assign s1_sum[b] = fp_add(base, s1_dot[b]);
    always_ff @(posedge clk) begin
      s1_old[b] <= mem[acc_half][acc_addr];
      if (s1_en) mem[s1_half][s1_addr] <= s1_sum[b];
    end
    for (genvar p = 0; p < MP; p++) begin : g_rd
      always_ff @(posedge clk)
        if (rd_en[p]) rd_lane[p][b] <= mem[rd_half[p]][rd_addr[p]];
    end
  end

  // bank select after the registered read
  logic [MP-1:0][MW-1:0] rd_bank_q;
  always_ff @(posedge clk)
    for (int p = 0; p < MP; p++) if (rd_en[p]) rd_bank_q[p] <= rd_bank[p];
  always_comb
    for (int p = 0; p < MP; p++) rd_data[p] = rd_lane[p][rd_bank_q[p]];

endmodule
