// clp_xfer: the transfer engines of a CLP (read_input, read_weights, write_output).
//
// Loads: on ld_start every input port and every weight port fetches its share of the next
// tile into the half ld_half of the input and weight buffers; ld_busy stays high until all
// ports are finished. Transfers are split across ports by the top array dimension: input
// port p loads banks tn = IR*p .. IR*p+IR-1 (IR = ceil(TN/NP)), weight port p loads the
// filter columns tm = WR*p .. WR*p+WR-1 (WR = ceil(TM/WP)). Each command is one maximal
// contiguous burst: one tile row of one input map (iwt words starting at
// I[n+tn][r*S+row][c*S]), or, for one output map m+tm, the nv consecutive K x K filters
// W[m+tm][n..n+nv-1] (nv*K*K words, N dimension first).
// Writes: on wr_start, output port p writes the tiles of output maps tm = OR*p .. OR*p+OR-1
// (OR = ceil(TM/MP)) from output-buffer half wr_half, one burst per tile row
// (cloops words to O[m+tm][r+tr][c]). Maps beyond M and input maps beyond N are skipped.
// All addresses are byte addresses of 32-bit words; arrays are dense and row-major.
// Channel timing: a command is held until cmd_ready; its data words follow on the stream
// with valid/ready. Loaders accept a word every cycle; write-out engines deliver a word per
// cycle from the output buffer's registered read port.
// The port partitioning and burst shapes follow the source's template; the channel protocol
// (command plus stream, as a data mover takes) is this implementation's.
module clp_xfer
  import clp_pkg::*;
#(
  parameter int TN       = 2,
  parameter int TM       = 64,
  parameter int KMAX     = 3,
  parameter int IN_SIZE  = 225,
  parameter int OUT_SIZE = 169,
  parameter int NP       = 1,
  parameter int WP       = 1,
  parameter int MP       = 1,
  localparam int IAW = (IN_SIZE > 1) ? $clog2(IN_SIZE) : 1,
  localparam int WAW = (KMAX * KMAX > 1) ? $clog2(KMAX * KMAX) : 1,
  localparam int OAW = (OUT_SIZE > 1) ? $clog2(OUT_SIZE) : 1,
  localparam int NW  = (TN > 1) ? $clog2(TN) : 1,
  localparam int MW  = (TM > 1) ? $clog2(TM) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // layer
  input  layer_desc_t             desc,
  input  logic [15:0]             hin,      // (R-1)*S+K
  input  logic [15:0]             win,      // (C-1)*S+K
  input  addr_t                   ibase,
  input  addr_t                   wbase,
  input  addr_t                   obase,
  // load job
  input  logic                    ld_start,
  input  logic                    ld_half,
  input  logic [15:0]             ld_n,
  input  logic [15:0]             ld_m,
  input  logic [15:0]             ld_r,
  input  logic [15:0]             ld_c,
  input  logic [15:0]             ld_rloops,
  input  logic [15:0]             ld_cloops,
  output logic                    ld_busy,
  // write job
  input  logic                    wr_start,
  input  logic                    wr_half,
  input  logic [15:0]             wr_m,
  input  logic [15:0]             wr_r,
  input  logic [15:0]             wr_c,
  input  logic [15:0]             wr_rloops,
  input  logic [15:0]             wr_cloops,
  output logic                    wr_busy,
  // input buffer write ports
  output logic [TN-1:0]           ib_we,
  output logic [TN-1:0][IAW-1:0]  ib_waddr,
  output word_t [TN-1:0]          ib_wdata,
  // weight buffer write ports
  output logic [TM-1:0]           wb_we,
  output logic [TM-1:0][NW-1:0]   wb_wtn,
  output logic [TM-1:0][WAW-1:0]  wb_waddr,
  output word_t [TM-1:0]          wb_wdata,
  // output buffer read ports
  output logic [MP-1:0]           ob_rd_en,
  output logic [MP-1:0][MW-1:0]   ob_rd_bank,
  output logic [MP-1:0][OAW-1:0]  ob_rd_addr,
  input  word_t [MP-1:0]          ob_rd_data,
  // input read channels
  output dm_cmd_t [NP-1:0]        in_cmd,
  output logic [NP-1:0]           in_cmd_valid,
  input  logic [NP-1:0]           in_cmd_ready,
  input  word_t [NP-1:0]          in_data,
  input  logic [NP-1:0]           in_valid,
  output logic [NP-1:0]           in_ready,
  // weight read channels
  output dm_cmd_t [WP-1:0]        wt_cmd,
  output logic [WP-1:0]           wt_cmd_valid,
  input  logic [WP-1:0]           wt_cmd_ready,
  input  word_t [WP-1:0]          wt_data,
  input  logic [WP-1:0]           wt_valid,
  output logic [WP-1:0]           wt_ready,
  // output write channels
  output dm_cmd_t [MP-1:0]        out_cmd,
  output logic [MP-1:0]           out_cmd_valid,
  input  logic [MP-1:0]           out_cmd_ready,
  output word_t [MP-1:0]          out_data,
  output logic [MP-1:0]           out_valid,
  input  logic [MP-1:0]           out_ready
);

  localparam int IR = (TN + NP - 1) / NP;
  localparam int WR = (TM + WP - 1) / WP;
  localparam int OR = (TM + MP - 1) / MP;

  typedef enum logic [1:0] {S_IDLE, S_CHK, S_CMD, S_DATA} st_e;

  logic [15:0] ih, iwt, kk, nv;
  assign ih  = 16'((32'(ld_rloops) - 1) * 32'(desc.s) + 32'(desc.k));
  assign iwt = 16'((32'(ld_cloops) - 1) * 32'(desc.s) + 32'(desc.k));
  assign kk  = 16'(32'(desc.k) * 32'(desc.k));
  assign nv  = (desc.n - ld_n < 16'(TN)) ? desc.n - ld_n : 16'(TN);

  logic [NP-1:0] in_busy;
  logic [WP-1:0] wt_busy;
  logic [MP-1:0] o_busy;
  assign ld_busy = |in_busy || |wt_busy;
  assign wr_busy = |o_busy;

  // ---------------------------------------------------------------- input ports
  logic [NP-1:0][TN-1:0]          ip_we;
  logic [NP-1:0][IAW-1:0]         ip_waddr;
  for (genvar p = 0; p < NP; p++) begin : g_in
    st_e         st;
    logic [15:0] tn, row, col;
    assign in_busy[p] = (st != S_IDLE);
    assign in_cmd_valid[p] = (st == S_CMD);
    assign in_ready[p]     = (st == S_DATA);
    assign in_cmd[p].addr  = ibase + 4 * ((32'(ld_n + tn) * 32'(hin) + 32'(ld_r) * 32'(desc.s)
                             + 32'(row)) * 32'(win) + 32'(ld_c) * 32'(desc.s));
    assign in_cmd[p].len   = iwt;
    assign ip_waddr[p]     = IAW'(32'(row) * 32'(iwt) + 32'(col));
    always_comb begin
      ip_we[p] = '0;
      if (st == S_DATA && in_valid[p]) ip_we[p][NW'(tn)] = 1'b1;
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        st <= S_IDLE; tn <= '0; row <= '0; col <= '0;
      end else begin
        case (st)
          S_IDLE: if (ld_start) begin
            tn <= 16'(IR * p); row <= '0; col <= '0; st <= S_CHK;
          end
          S_CHK: st <= (tn >= 16'(IR * p + IR) || tn >= 16'(TN) || ld_n + tn >= desc.n)
                       ? S_IDLE : S_CMD;
          S_CMD: if (in_cmd_ready[p]) begin col <= '0; st <= S_DATA; end
          S_DATA: if (in_valid[p]) begin
            if (col == iwt - 1) begin
              col <= '0;
              if (row == ih - 1) begin row <= '0; tn <= tn + 1; st <= S_CHK; end
              else begin row <= row + 1; st <= S_CMD; end
            end else col <= col + 1;
          end
          default: st <= S_IDLE;
        endcase
      end
  end

  always_comb begin
    ib_we = '0; ib_waddr = '0; ib_wdata = '0;
    for (int b = 0; b < TN; b++)
      for (int p = 0; p < NP; p++)
        if (b / IR == p) begin
          ib_we[b]    = ip_we[p][b];
          ib_waddr[b] = ip_waddr[p];
          ib_wdata[b] = in_data[p];
        end
  end

  // ---------------------------------------------------------------- weight ports
  logic [WP-1:0][TM-1:0]  wp_we;
  logic [WP-1:0][NW-1:0]  wp_tn;
  logic [WP-1:0][WAW-1:0] wp_addr;
  for (genvar p = 0; p < WP; p++) begin : g_wt
    st_e         st;
    logic [15:0] tm, tn, a;
    assign wt_busy[p]      = (st != S_IDLE);
    assign wt_cmd_valid[p] = (st == S_CMD);
    assign wt_ready[p]     = (st == S_DATA);
    assign wt_cmd[p].addr  = wbase + 4 * ((32'(ld_m + tm) * 32'(desc.n) + 32'(ld_n)) * 32'(kk));
    assign wt_cmd[p].len   = 16'(32'(nv) * 32'(kk));
    assign wp_tn[p]        = NW'(tn);
    assign wp_addr[p]      = WAW'(a);
    always_comb begin
      wp_we[p] = '0;
      if (st == S_DATA && wt_valid[p]) wp_we[p][MW'(tm)] = 1'b1;
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        st <= S_IDLE; tm <= '0; tn <= '0; a <= '0;
      end else begin
        case (st)
          S_IDLE: if (ld_start) begin tm <= 16'(WR * p); st <= S_CHK; end
          S_CHK: st <= (tm >= 16'(WR * p + WR) || tm >= 16'(TM) || ld_m + tm >= desc.m)
                       ? S_IDLE : S_CMD;
          S_CMD: if (wt_cmd_ready[p]) begin tn <= '0; a <= '0; st <= S_DATA; end
          S_DATA: if (wt_valid[p]) begin
            if (a == kk - 1) begin
              a <= '0;
              if (tn == nv - 1) begin tm <= tm + 1; st <= S_CHK; end
              else tn <= tn + 1;
            end else a <= a + 1;
          end
          default: st <= S_IDLE;
        endcase
      end
  end

  always_comb begin
    wb_we = '0; wb_wtn = '0; wb_waddr = '0; wb_wdata = '0;
    for (int m = 0; m < TM; m++)
      for (int p = 0; p < WP; p++)
        if (m / WR == p) begin
          wb_we[m]    = wp_we[p][m];
          wb_wtn[m]   = wp_tn[p];
          wb_waddr[m] = wp_addr[p];
          wb_wdata[m] = wt_data[p];
        end
  end

  // ---------------------------------------------------------------- output ports
  for (genvar p = 0; p < MP; p++) begin : g_out
    st_e         st;
    logic [15:0] tm, tr, issued;
    logic        dv;
    assign o_busy[p]        = (st != S_IDLE);
    assign out_cmd_valid[p] = (st == S_CMD);
    assign out_cmd[p].addr  = obase + 4 * ((32'(wr_m + tm) * 32'(desc.r) + 32'(wr_r + tr))
                              * 32'(desc.c) + 32'(wr_c));
    assign out_cmd[p].len   = wr_cloops;
    assign ob_rd_en[p]      = (st == S_DATA) && (issued < wr_cloops) && (!dv || out_ready[p]);
    assign ob_rd_bank[p]    = MW'(tm);
    assign ob_rd_addr[p]    = OAW'(32'(tr) * 32'(wr_cloops) + 32'(issued));
    assign out_valid[p]     = dv;
    assign out_data[p]      = ob_rd_data[p];
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        st <= S_IDLE; tm <= '0; tr <= '0; issued <= '0; dv <= 1'b0;
      end else begin
        if (ob_rd_en[p]) begin
          dv <= 1'b1;
          issued <= issued + 1;
        end else if (out_ready[p]) dv <= 1'b0;
        case (st)
          S_IDLE: if (wr_start) begin tm <= 16'(OR * p); tr <= '0; st <= S_CHK; end
          S_CHK: st <= (tm >= 16'(OR * p + OR) || tm >= 16'(TM) || wr_m + tm >= desc.m)
                       ? S_IDLE : S_CMD;
          S_CMD: if (out_cmd_ready[p]) begin issued <= '0; st <= S_DATA; end
          S_DATA: if (dv && out_ready[p] && issued == wr_cloops && !ob_rd_en[p]) begin
            if (tr == wr_rloops - 1) begin tr <= '0; tm <= tm + 1; st <= S_CHK; end
            else begin tr <= tr + 1; st <= S_CMD; end
          end
          default: st <= S_IDLE;
        endcase
      end
  end

endmodule
