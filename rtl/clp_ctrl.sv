// clp_ctrl: the CLP state machine (the template's TOP loop).
//
// On start it fetches the 32-byte layer descriptor (R, C, M, N, K, S, Tr, Tc) in one burst
// on the descriptor port, then loads the layer's M bias words on the same port, then runs
// the tile loops r (step Tr), c (step Tc), m (step Tm), n (step Tn). Three machines work on
// the tiles concurrently, like the dataflow stages of the template:
//   loader  - fills the free half of the input/weight ping-pong buffers with tile t+1,
//   compute - runs clp_compute on a full half, accumulating into the current output half,
//   writer  - once the last input-map group (n + Tn >= N) of an output tile is done, writes
//             that output half to memory while compute moves on to the other half.
// Flags in_full[2] and out_full[2] hand the halves between the machines. rloops and cloops
// equal Tr and Tc except at the bottom/right edge of the layer, where they shrink to the
// remaining rows/columns. done rises when compute has finished the last tile and the writer
// has drained both output halves; it stays high until the next start.
// Timing: start is a one-cycle pulse while idle; descriptor fields are held in registers.
// The loop order, ping-pong scheme and output write only on the last n step follow the
// source; the bias load once per layer and the flag handshake are this design's choices.
module clp_ctrl
  import clp_pkg::*;
#(
  parameter int TN   = 2,
  parameter int TM   = 64,
  parameter int MMAX = 192,
  localparam int BROWS = (MMAX + TM - 1) / TM,
  localparam int BRW   = (BROWS > 1) ? $clog2(BROWS) : 1,
  localparam int LW    = (TM > 1) ? $clog2(TM) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  job_t          job,
  output logic          done,
  output logic          idle,
  // layer arguments for the other units
  output layer_desc_t   desc,
  output logic [15:0]   hin,
  output logic [15:0]   win,
  // descriptor / bias read channel
  output dm_cmd_t       dsc_cmd,
  output logic          dsc_cmd_valid,
  input  logic          dsc_cmd_ready,
  input  word_t         dsc_data,
  input  logic          dsc_valid,
  output logic          dsc_ready,
  // bias buffer write / read
  output logic          bb_we,
  output logic [BRW-1:0] bb_wrow,
  output logic [LW-1:0] bb_wlane,
  output word_t         bb_wdata,
  output logic [BRW-1:0] bb_rrow,
  // loads
  output logic          ld_start,
  output logic          ld_half,
  output logic [15:0]   ld_n, ld_m, ld_r, ld_c, ld_rloops, ld_cloops,
  input  logic          ld_busy,
  // compute
  output logic          cp_start,
  output logic [15:0]   cp_rloops, cp_cloops, cp_iwt, cp_nv,
  output logic          cp_first,
  output logic          cp_ihalf,
  output logic          cp_ohalf,
  input  logic          cp_done,
  // write-out
  output logic          wr_start,
  output logic          wr_half,
  output logic [15:0]   wr_m, wr_r, wr_c, wr_rloops, wr_cloops,
  input  logic          wr_busy
);

  typedef enum logic [2:0] {M_IDLE, M_DCMD, M_DDATA, M_BCMD, M_BDATA, M_RUN} main_e;
  typedef enum logic [1:0] {L_WAIT, L_BUSY, L_DONE} ld_e;
  typedef enum logic [1:0] {C_WAIT, C_BUSY, C_DONE} cp_e;
  typedef enum logic [1:0] {W_WAIT, W_BUSY} wr_e;

  main_e mst;
  ld_e   lst;
  cp_e   cst;
  wr_e   wst;
  logic [15:0] cnt;
  logic [1:0]  in_full, out_full;
  logic        set_in, clr_in, set_out, clr_out;
  logic        set_in_h, clr_in_h, set_out_h, clr_out_h;

  function automatic logic [15:0] min16(input logic [15:0] a, input logic [15:0] b);
    return (a < b) ? a : b;
  endfunction

  // ------------------------------------------------------------ descriptor and bias
  assign dsc_cmd_valid = (mst == M_DCMD) || (mst == M_BCMD);
  assign dsc_cmd.addr  = (mst == M_DCMD) ? job.desc : job.bbase;
  assign dsc_cmd.len   = (mst == M_DCMD) ? 16'(DESC_WORDS) : desc.m;
  assign dsc_ready     = (mst == M_DDATA) || (mst == M_BDATA);
  assign bb_we         = (mst == M_BDATA) && dsc_valid;
  assign bb_wdata      = dsc_data;
  assign idle          = (mst == M_IDLE);
  assign hin = 16'((32'(desc.r) - 1) * 32'(desc.s) + 32'(desc.k));
  assign win = 16'((32'(desc.c) - 1) * 32'(desc.s) + 32'(desc.k));

  logic run_done;
  assign run_done = (cst == C_DONE) && (wst == W_WAIT) && (out_full == 2'b00);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      mst <= M_IDLE; done <= 1'b0; cnt <= '0; bb_wrow <= '0; bb_wlane <= '0;
      desc <= '0;
    end else begin
      case (mst)
        M_IDLE: if (start) begin done <= 1'b0; mst <= M_DCMD; end
        M_DCMD: if (dsc_cmd_ready) begin cnt <= '0; mst <= M_DDATA; end
        M_DDATA: if (dsc_valid) begin
          case (cnt)
            16'd0: desc.r  <= dsc_data[15:0];
            16'd1: desc.c  <= dsc_data[15:0];
            16'd2: desc.m  <= dsc_data[15:0];
            16'd3: desc.n  <= dsc_data[15:0];
            16'd4: desc.k  <= dsc_data[7:0];
            16'd5: desc.s  <= dsc_data[7:0];
            16'd6: desc.tr <= dsc_data[15:0];
            default: desc.tc <= dsc_data[15:0];
          endcase
          cnt <= cnt + 1;
          if (cnt == 16'(DESC_WORDS - 1)) mst <= M_BCMD;
        end
        M_BCMD: if (dsc_cmd_ready) begin
          cnt <= '0; bb_wrow <= '0; bb_wlane <= '0; mst <= M_BDATA;
        end
        M_BDATA: if (dsc_valid) begin
          cnt <= cnt + 1;
          if (bb_wlane == LW'(TM - 1)) begin bb_wlane <= '0; bb_wrow <= bb_wrow + 1; end
          else bb_wlane <= bb_wlane + 1;
          if (cnt == desc.m - 1) mst <= M_RUN;
        end
        M_RUN: if (run_done) begin done <= 1'b1; mst <= M_IDLE; end
        default: mst <= M_IDLE;
      endcase
    end

  // ------------------------------------------------------------ loader
  logic lo_last;
  assign ld_rloops = min16(desc.tr, desc.r - ld_r);
  assign ld_cloops = min16(desc.tc, desc.c - ld_c);
  assign lo_last = (ld_n + 16'(TN) >= desc.n) && (ld_m + 16'(TM) >= desc.m) &&
                   (ld_c + desc.tc >= desc.c) && (ld_r + desc.tr >= desc.r);
  assign ld_start = (mst == M_RUN) && (lst == L_WAIT) && !in_full[ld_half];
  assign set_in   = (lst == L_BUSY) && !ld_busy;
  assign set_in_h = ld_half;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      lst <= L_WAIT; ld_half <= 1'b0;
      ld_n <= '0; ld_m <= '0; ld_r <= '0; ld_c <= '0;
    end else if (mst == M_BCMD) begin
      lst <= L_WAIT; ld_half <= 1'b0;
      ld_n <= '0; ld_m <= '0; ld_r <= '0; ld_c <= '0;
    end else begin
      case (lst)
        L_WAIT: if (ld_start) lst <= L_BUSY;
        L_BUSY: if (!ld_busy) begin
          ld_half <= ~ld_half;
          lst <= lo_last ? L_DONE : L_WAIT;
          if (ld_n + 16'(TN) < desc.n) ld_n <= ld_n + 16'(TN);
          else begin
            ld_n <= '0;
            if (ld_m + 16'(TM) < desc.m) ld_m <= ld_m + 16'(TM);
            else begin
              ld_m <= '0;
              if (ld_c + desc.tc < desc.c) ld_c <= ld_c + desc.tc;
              else begin
                ld_c <= '0;
                ld_r <= ld_r + desc.tr;
              end
            end
          end
        end
        default: ;
      endcase
    end

  // ------------------------------------------------------------ compute
  logic [15:0] cn, cm, cr, cc;
  logic        cp_last, cp_lastn;
  assign cp_rloops = min16(desc.tr, desc.r - cr);
  assign cp_cloops = min16(desc.tc, desc.c - cc);
  assign cp_iwt    = 16'((32'(cp_cloops) - 1) * 32'(desc.s) + 32'(desc.k));
  assign cp_nv     = min16(16'(TN), desc.n - cn);
  assign cp_first  = (cn == 16'd0);
  assign cp_lastn  = (cn + 16'(TN) >= desc.n);
  assign cp_last   = cp_lastn && (cm + 16'(TM) >= desc.m) &&
                     (cc + desc.tc >= desc.c) && (cr + desc.tr >= desc.r);
  assign cp_start  = (mst == M_RUN) && (cst == C_WAIT) && in_full[cp_ihalf] &&
                     (!cp_first || !out_full[cp_ohalf]);
  assign clr_in    = (cst == C_BUSY) && cp_done;
  assign clr_in_h  = cp_ihalf;
  assign set_out   = (cst == C_BUSY) && cp_done && cp_lastn;
  assign set_out_h = cp_ohalf;

  // tile information handed to the writer with each output half
  logic [1:0][15:0] wi_m, wi_r, wi_c, wi_rl, wi_cl;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cst <= C_WAIT; cp_ihalf <= 1'b0; cp_ohalf <= 1'b0;
      cn <= '0; cm <= '0; cr <= '0; cc <= '0; bb_rrow <= '0;
    end else if (mst == M_BCMD) begin
      cst <= C_WAIT; cp_ihalf <= 1'b0; cp_ohalf <= 1'b0;
      cn <= '0; cm <= '0; cr <= '0; cc <= '0; bb_rrow <= '0;
    end else begin
      case (cst)
        C_WAIT: if (cp_start) cst <= C_BUSY;
        C_BUSY: if (cp_done) begin
          cp_ihalf <= ~cp_ihalf;
          cst <= cp_last ? C_DONE : C_WAIT;
          if (cp_lastn) begin
            cp_ohalf <= ~cp_ohalf;
            wi_m[cp_ohalf]  <= cm;
            wi_r[cp_ohalf]  <= cr;
            wi_c[cp_ohalf]  <= cc;
            wi_rl[cp_ohalf] <= cp_rloops;
            wi_cl[cp_ohalf] <= cp_cloops;
          end
          if (!cp_lastn) cn <= cn + 16'(TN);
          else begin
            cn <= '0;
            if (cm + 16'(TM) < desc.m) begin
              cm <= cm + 16'(TM);
              bb_rrow <= bb_rrow + 1;
            end else begin
              cm <= '0;
              bb_rrow <= '0;
              if (cc + desc.tc < desc.c) cc <= cc + desc.tc;
              else begin
                cc <= '0;
                cr <= cr + desc.tr;
              end
            end
          end
        end
        default: ;
      endcase
    end

  // ------------------------------------------------------------ writer
  assign wr_start  = (wst == W_WAIT) && out_full[wr_half];
  assign wr_m      = wi_m[wr_half];
  assign wr_r      = wi_r[wr_half];
  assign wr_c      = wi_c[wr_half];
  assign wr_rloops = wi_rl[wr_half];
  assign wr_cloops = wi_cl[wr_half];
  assign clr_out   = (wst == W_BUSY) && !wr_busy;
  assign clr_out_h = wr_half;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wst <= W_WAIT; wr_half <= 1'b0;
    end else if (mst == M_BCMD) begin
      wst <= W_WAIT; wr_half <= 1'b0;
    end else begin
      case (wst)
        W_WAIT: if (wr_start) wst <= W_BUSY;
        W_BUSY: if (!wr_busy) begin wst <= W_WAIT; wr_half <= ~wr_half; end
        default: ;
      endcase
    end

  // ------------------------------------------------------------ half flags
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      in_full <= '0; out_full <= '0;
    end else if (mst == M_BCMD) begin
      in_full <= '0; out_full <= '0;
    end else begin
      if (set_in)  in_full[set_in_h]   <= 1'b1;
      if (clr_in)  in_full[clr_in_h]   <= 1'b0;
      if (set_out) out_full[set_out_h] <= 1'b1;
      if (clr_out) out_full[clr_out_h] <= 1'b0;
    end

  // a half is never filled while full, never freed while empty
  assert property (@(posedge clk) disable iff (!rst_n) set_in |-> !in_full[set_in_h]);
  assert property (@(posedge clk) disable iff (!rst_n) set_out |-> !out_full[set_out_h]);
  assert property (@(posedge clk) disable iff (!rst_n) clr_out |-> out_full[clr_out_h]);

endmodule
