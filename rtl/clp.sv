// clp: one convolutional layer processor (CLP), the building block of the accelerator.
//
// A CLP computes convolutional layers one at a time. Its compute module is TM dot-product
// units of width TN (TN*TM multipliers and adders), each followed by an accumulation adder
// into its own output-buffer bank; TN input-buffer banks feed all units with the same TN
// words, and TN*TM weight banks give each unit its own TN weights. All buffers are
// double-buffered so that memory transfers for the next tile overlap the current compute.
// Started through its AXI4-Lite registers (axil_regs), the CLP fetches the layer
// descriptor, loads the biases and processes the layer tile by tile (clp_ctrl), moving data
// through a descriptor/bias read port, NP input read ports, WP weight read ports and MP
// output write ports (clp_xfer). done (also readable in CTRL) signals the end of the layer.
// Buffer sizes: IN_SIZE words per input bank half (the largest ((Tr-1)S+K)((Tc-1)S+K) of
// the layers the CLP runs), OUT_SIZE words per output bank half (largest Tr*Tc), KMAX the
// largest filter size and MMAX the largest M. The defaults are CLP0 of the four-CLP AlexNet
// design for the 485T (Tn=2, Tm=64, layers 4a/4b/5a/5b with Tr=Tc=13, K=3).
// Layer arguments must satisfy Tr*Tc <= OUT_SIZE, ((Tr-1)S+K)((Tc-1)S+K) <= IN_SIZE,
// K <= KMAX and M <= MMAX.
module clp
  import clp_pkg::*;
  import fp32_pkg::*;
#(
  parameter int TN       = 2,
  parameter int TM       = 64,
  parameter int KMAX     = 3,
  parameter int MMAX     = 192,
  parameter int IN_SIZE  = 225,
  parameter int OUT_SIZE = 169,
  parameter int NP       = 1,
  parameter int WP       = 1,
  parameter int MP       = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite slave
  input  logic [7:0]          s_awaddr,
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [31:0]         s_wdata,
  input  logic [3:0]          s_wstrb,
  input  logic                s_wvalid,
  output logic                s_wready,
  output logic [1:0]          s_bresp,
  output logic                s_bvalid,
  input  logic                s_bready,
  input  logic [7:0]          s_araddr,
  input  logic                s_arvalid,
  output logic                s_arready,
  output logic [31:0]         s_rdata,
  output logic [1:0]          s_rresp,
  output logic                s_rvalid,
  input  logic                s_rready,
  output logic                done,
  // descriptor / bias read channel
  output dm_cmd_t             dsc_cmd,
  output logic                dsc_cmd_valid,
  input  logic                dsc_cmd_ready,
  input  word_t               dsc_data,
  input  logic                dsc_valid,
  output logic                dsc_ready,
  // input read channels
  output dm_cmd_t [NP-1:0]    in_cmd,
  output logic [NP-1:0]       in_cmd_valid,
  input  logic [NP-1:0]       in_cmd_ready,
  input  word_t [NP-1:0]      in_data,
  input  logic [NP-1:0]       in_valid,
  output logic [NP-1:0]       in_ready,
  // weight read channels
  output dm_cmd_t [WP-1:0]    wt_cmd,
  output logic [WP-1:0]       wt_cmd_valid,
  input  logic [WP-1:0]       wt_cmd_ready,
  input  word_t [WP-1:0]      wt_data,
  input  logic [WP-1:0]       wt_valid,
  output logic [WP-1:0]       wt_ready,
  // output write channels
  output dm_cmd_t [MP-1:0]    out_cmd,
  output logic [MP-1:0]       out_cmd_valid,
  input  logic [MP-1:0]       out_cmd_ready,
  output word_t [MP-1:0]      out_data,
  output logic [MP-1:0]       out_valid,
  input  logic [MP-1:0]       out_ready
);

  localparam int IAW   = (IN_SIZE > 1) ? $clog2(IN_SIZE) : 1;
  localparam int WAW   = (KMAX * KMAX > 1) ? $clog2(KMAX * KMAX) : 1;
  localparam int OAW   = (OUT_SIZE > 1) ? $clog2(OUT_SIZE) : 1;
  localparam int NW    = (TN > 1) ? $clog2(TN) : 1;
  localparam int MW    = (TM > 1) ? $clog2(TM) : 1;
  localparam int BROWS = (MMAX + TM - 1) / TM;
  localparam int BRW   = (BROWS > 1) ? $clog2(BROWS) : 1;

  logic        start, idle;
  job_t        job;
  layer_desc_t desc;
  logic [15:0] hin, win;

  axil_regs u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .start, .job, .done, .idle
  );

  // controller <-> units
  logic           bb_we;
  logic [BRW-1:0] bb_wrow, bb_rrow;
  logic [MW-1:0]  bb_wlane;
  word_t          bb_wdata;
  word_t [TM-1:0] bias;
  logic           ld_start, ld_half, ld_busy;
  logic [15:0]    ld_n, ld_m, ld_r, ld_c, ld_rloops, ld_cloops;
  logic           cp_start, cp_first, cp_ihalf, cp_ohalf, cp_done, cp_busy, cp_issue;
  logic [15:0]    cp_rloops, cp_cloops, cp_iwt, cp_nv;
  logic           wr_start, wr_half, wr_busy;
  logic [15:0]    wr_m, wr_r, wr_c, wr_rloops, wr_cloops;

  clp_ctrl #(.TN(TN), .TM(TM), .MMAX(MMAX)) u_ctrl (
    .clk, .rst_n, .start, .job, .done, .idle, .desc, .hin, .win,
    .dsc_cmd, .dsc_cmd_valid, .dsc_cmd_ready, .dsc_data, .dsc_valid, .dsc_ready,
    .bb_we, .bb_wrow, .bb_wlane, .bb_wdata, .bb_rrow,
    .ld_start, .ld_half, .ld_n, .ld_m, .ld_r, .ld_c, .ld_rloops, .ld_cloops, .ld_busy,
    .cp_start, .cp_rloops, .cp_cloops, .cp_iwt, .cp_nv, .cp_first, .cp_ihalf, .cp_ohalf,
    .cp_done,
    .wr_start, .wr_half, .wr_m, .wr_r, .wr_c, .wr_rloops, .wr_cloops, .wr_busy
  );

  bias_buf #(.TM(TM), .MMAX(MMAX)) u_bias (
    .clk, .we(bb_we), .wrow(bb_wrow), .wlane(bb_wlane), .wdata(bb_wdata),
    .rrow(bb_rrow), .rdata(bias)
  );

  // buffers
  logic [TN-1:0]           ib_we;
  logic [TN-1:0][IAW-1:0]  ib_waddr;
  word_t [TN-1:0]          ib_wdata;
  logic [TM-1:0]           wb_we;
  logic [TM-1:0][NW-1:0]   wb_wtn;
  logic [TM-1:0][WAW-1:0]  wb_waddr;
  word_t [TM-1:0]          wb_wdata;
  logic [MP-1:0]           ob_rd_en;
  logic [MP-1:0][MW-1:0]   ob_rd_bank;
  logic [MP-1:0][OAW-1:0]  ob_rd_addr;
  word_t [MP-1:0]          ob_rd_data;
  logic                    buf_rhalf;
  logic [IAW-1:0]          in_raddr;
  word_t [TN-1:0]          in_rdata;
  logic [WAW-1:0]          w_raddr;
  word_t [TM-1:0][TN-1:0]  w_rdata;
  logic                    acc_en, acc_half, acc_init;
  logic [OAW-1:0]          acc_addr;
  fp32_t [TM-1:0]          acc_dot;

  in_buf #(.TN(TN), .IN_SIZE(IN_SIZE)) u_ibuf (
    .clk, .we(ib_we), .whalf(ld_half), .waddr(ib_waddr), .wdata(ib_wdata),
    .rhalf(buf_rhalf), .raddr(in_raddr), .rdata(in_rdata)
  );

  w_buf #(.TN(TN), .TM(TM), .KMAX(KMAX)) u_wbuf (
    .clk, .we(wb_we), .whalf(ld_half), .wtn(wb_wtn), .waddr(wb_waddr), .wdata(wb_wdata),
    .rhalf(buf_rhalf), .raddr(w_raddr), .rdata(w_rdata)
  );

  out_buf #(.TM(TM), .OUT_SIZE(OUT_SIZE), .MP(MP)) u_obuf (
    .clk, .rst_n, .acc_en, .acc_half, .acc_addr, .acc_init, .dot(acc_dot), .bias,
    .rd_en(ob_rd_en), .rd_half({MP{wr_half}}), .rd_bank(ob_rd_bank), .rd_addr(ob_rd_addr),
    .rd_data(ob_rd_data)
  );

  clp_compute #(.TN(TN), .TM(TM), .KMAX(KMAX), .IN_SIZE(IN_SIZE), .OUT_SIZE(OUT_SIZE)) u_comp (
    .clk, .rst_n, .start(cp_start), .k(desc.k), .s(desc.s), .rloops(cp_rloops),
    .cloops(cp_cloops), .iwt(cp_iwt), .nv(cp_nv), .first(cp_first), .ihalf(cp_ihalf),
    .ohalf(cp_ohalf), .busy(cp_busy), .done(cp_done), .issue(cp_issue),
    .buf_rhalf, .in_raddr, .in_rdata, .w_raddr, .w_rdata,
    .acc_en, .acc_half, .acc_addr, .acc_init, .acc_dot
  );

  clp_xfer #(.TN(TN), .TM(TM), .KMAX(KMAX), .IN_SIZE(IN_SIZE), .OUT_SIZE(OUT_SIZE),
             .NP(NP), .WP(WP), .MP(MP)) u_xfer (
    .clk, .rst_n, .desc, .hin, .win, .ibase(job.ibase), .wbase(job.wbase), .obase(job.obase),
    .ld_start, .ld_half, .ld_n, .ld_m, .ld_r, .ld_c, .ld_rloops, .ld_cloops, .ld_busy,
    .wr_start, .wr_half, .wr_m, .wr_r, .wr_c, .wr_rloops, .wr_cloops, .wr_busy,
    .ib_we, .ib_waddr, .ib_wdata, .wb_we, .wb_wtn, .wb_waddr, .wb_wdata,
    .ob_rd_en, .ob_rd_bank, .ob_rd_addr, .ob_rd_data,
    .in_cmd, .in_cmd_valid, .in_cmd_ready, .in_data, .in_valid, .in_ready,
    .wt_cmd, .wt_cmd_valid, .wt_cmd_ready, .wt_data, .wt_valid, .wt_ready,
    .out_cmd, .out_cmd_valid, .out_cmd_ready, .out_data, .out_valid, .out_ready
  );

endmodule
