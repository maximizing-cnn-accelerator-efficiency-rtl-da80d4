// clp_compute: the CLP compute module, one input tile per start.
//
// For a tile it walks the loop nest i < K, j < K, tr < rloops, tc < cloops (tc innermost),
// one iteration per cycle. Each iteration reads, in every input bank, the word at
// (S*tr+i, S*tc+j) of the tile, reads weight (i, j) of every (tn, tm) filter, lets the TM
// dot-product units each reduce their TN products, and sends the TM results to the output
// buffer, which adds them to output word (tr, tc). Keeping K x K outermost means the same
// output word is revisited only after rloops*cloops cycles; the output buffer's bypass
// covers the case of a 1 x 1 tile. On the first input-map group of an output tile (first=1)
// the i=0, j=0 pass starts each word from its bias.
//
// Pipeline: cycle t issues buffer addresses, t+1 has the buffer data and computes the dot
// products, t+2 presents them to the output buffer, which writes at the end of t+3. done
// pulses once the last write has happened. A tile takes K*K*rloops*cloops issue cycles,
// which summed over tiles gives the cycle count R*C*ceil(N/Tn)*ceil(M/Tm)*K^2.
// The loop order, bias rule and bank mapping follow the source's template; the pipeline
// depth is this implementation's.
module clp_compute
  import clp_pkg::*;
  import fp32_pkg::*;
#(
  parameter int TN       = 2,
  parameter int TM       = 64,
  parameter int KMAX     = 3,
  parameter int IN_SIZE  = 225,
  parameter int OUT_SIZE = 169,
  localparam int IAW = (IN_SIZE > 1) ? $clog2(IN_SIZE) : 1,
  localparam int WAW = (KMAX * KMAX > 1) ? $clog2(KMAX * KMAX) : 1,
  localparam int OAW = (OUT_SIZE > 1) ? $clog2(OUT_SIZE) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // tile command
  input  logic                    start,
  input  logic [7:0]              k,
  input  logic [7:0]              s,
  input  logic [15:0]             rloops,
  input  logic [15:0]             cloops,
  input  logic [15:0]             iwt,      // input tile width (cloops-1)*S+K
  input  logic [15:0]             nv,       // valid input maps in this group (1..TN)
  input  logic                    first,    // first input-map group of the output tile
  input  logic                    ihalf,    // input/weight half to read
  input  logic                    ohalf,    // output half to accumulate into
  output logic                    busy,
  output logic                    done,
  output logic                    issue,    // one loop iteration issued this cycle
  // buffer read ports
  output logic                    buf_rhalf,
  output logic [IAW-1:0]          in_raddr,
  input  word_t [TN-1:0]          in_rdata,
  output logic [WAW-1:0]          w_raddr,
  input  word_t [TM-1:0][TN-1:0]  w_rdata,
  // output buffer accumulate port
  output logic                    acc_en,
  output logic                    acc_half,
  output logic [OAW-1:0]          acc_addr,
  output logic                    acc_init,
  output fp32_t [TM-1:0]          acc_dot
);

  logic [7:0]  ci, cj;
  logic [15:0] ctr, ctc;
  logic        last_iter;
  logic [2:0]  drain;
  logic [TN-1:0] mask;

  assign issue     = busy && (drain == 3'd0);
  assign last_iter = (ci == k - 8'd1) && (cj == k - 8'd1) &&
                     (ctr == rloops - 16'd1) && (ctc == cloops - 16'd1);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; drain <= 3'd0;
      ci <= '0; cj <= '0; ctr <= '0; ctc <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        ci <= '0; cj <= '0; ctr <= '0; ctc <= '0;
        drain <= 3'd0;
      end else if (busy && drain != 3'd0) begin
        if (drain == 3'd4) begin
          busy <= 1'b0;
          done <= 1'b1;
          drain <= 3'd0;
        end else drain <= drain + 3'd1;
      end else if (issue) begin
        if (last_iter) drain <= 3'd1;
        if (ctc != cloops - 16'd1) ctc <= ctc + 16'd1;
        else begin
          ctc <= '0;
          if (ctr != rloops - 16'd1) ctr <= ctr + 16'd1;
          else begin
            ctr <= '0;
            if (cj != k - 8'd1) cj <= cj + 8'd1;
            else begin
              cj <= '0;
              ci <= ci + 8'd1;
            end
          end
        end
      end
    end

  // stage 0: addresses
  logic [31:0] in_a, w_a, o_a;
  always_comb begin
    in_a = (32'(s) * 32'(ctr) + 32'(ci)) * 32'(iwt) + 32'(s) * 32'(ctc) + 32'(cj);
    w_a  = 32'(ci) * 32'(k) + 32'(cj);
    o_a  = 32'(ctr) * 32'(cloops) + 32'(ctc);
  end
  assign in_raddr  = IAW'(in_a);
  assign w_raddr   = WAW'(w_a);
  assign buf_rhalf = ihalf;

  always_comb
    for (int t = 0; t < TN; t++) mask[t] = (16'(t) < nv);

  // stage 1 / 2 control
  logic           p1_v, p2_v;
  logic [OAW-1:0] p1_a, p2_a;
  logic           p1_init, p2_init;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      p1_v <= 1'b0; p2_v <= 1'b0;
    end else begin
      p1_v <= issue;
      p2_v <= p1_v;
    end
  always_ff @(posedge clk) begin
    p1_a    <= OAW'(o_a);
    p1_init <= first && (ci == 8'd0) && (cj == 8'd0);
    p2_a    <= p1_a;
    p2_init <= p1_init;
  end

  logic [TM-1:0] dv;
  for (genvar m = 0; m < TM; m++) begin : g_dot
    dot_product #(.TN(TN)) u_dot (
      .clk     (clk),
      .rst_n   (rst_n),
      .valid   (p1_v),
      .x       (in_rdata),
      .w       (w_rdata[m]),
      .mask    (mask),
      .y       (acc_dot[m]),
      .y_valid (dv[m])
    );
  end

  assign acc_en   = p2_v;
  assign acc_half = ohalf;
  assign acc_addr = p2_a;
  assign acc_init = p2_init;

endmodule
