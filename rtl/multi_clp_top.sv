// multi_clp_top: Multi-CLP convolutional-layer accelerator.
//
// Instead of one large convolutional layer processor (CLP) that computes every layer of a
// CNN in turn, the arithmetic is split into several smaller CLPs of different shapes
// (Tn x Tm), each sized for the layers bound to it, and the CLPs work concurrently on
// different images. The default configuration is the four-CLP AlexNet design for a
// Virtex-7 485T with 32-bit floating point (448 multipliers and 448 adders in total):
//   CLP0  Tn=2 Tm=64  layers 4a,4b,5a,5b   Tr=Tc=13
//   CLP1  Tn=1 Tm=96  layers 3a,3b         Tr=Tc=13
//   CLP2  Tn=3 Tm=24  layers 1a,1b         Tr=14 Tc=19
//   CLP3  Tn=8 Tm=19  layers 2a,2b         Tr=14 Tc=27
// The buffer sizes of each CLP (IN_SIZE, OUT_SIZE, KMAX, MMAX) are those its layers need
// with these tiles. An epoch scheduler starts every CLP on its list of layers for the
// current epoch and signals the end of the epoch when all have finished.
// Interface: the host fills the scheduler's job table (tbl_*, nj_*) and pulses epoch_start;
// epoch_done pulses at the end of the epoch. Every CLP's memory ports are brought out
// unchanged for the AXI crossbar / data movers / DRAM that sit outside this design:
// read channel 0 of a CLP is its descriptor/bias port, channels 1..NP its input ports,
// NP+1..NP+WP its weight ports; write channels 0..MP-1 its output ports.
module multi_clp_top
  import clp_pkg::*;
#(
  parameter int NUM_CLP  = 4,
  parameter int MAX_JOBS = 8,
  parameter int NP       = 1,
  parameter int WP       = 1,
  parameter int MP       = 1,
  parameter int TN       [NUM_CLP] = '{2, 1, 3, 8},
  parameter int TM       [NUM_CLP] = '{64, 96, 24, 19},
  parameter int KMAX     [NUM_CLP] = '{3, 3, 11, 5},
  parameter int MMAX     [NUM_CLP] = '{192, 192, 48, 128},
  parameter int IN_SIZE  [NUM_CLP] = '{225, 225, 5229, 558},
  parameter int OUT_SIZE [NUM_CLP] = '{169, 169, 266, 378},
  localparam int NRD = 1 + NP + WP,
  localparam int CW  = (NUM_CLP > 1) ? $clog2(NUM_CLP) : 1,
  localparam int JW  = (MAX_JOBS > 1) ? $clog2(MAX_JOBS) : 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // host: job table and epochs
  input  logic                                tbl_we,
  input  logic [CW-1:0]                       tbl_clp,
  input  logic [JW-1:0]                       tbl_idx,
  input  job_t                                tbl_job,
  input  logic                                nj_we,
  input  logic [CW-1:0]                       nj_clp,
  input  logic [JW:0]                         nj_val,
  input  logic                                epoch_start,
  output logic                                epoch_busy,
  output logic                                epoch_done,
  output logic [31:0]                         epoch_count,
  // memory read channels
  output dm_cmd_t [NUM_CLP-1:0][NRD-1:0]      rd_cmd,
  output logic    [NUM_CLP-1:0][NRD-1:0]      rd_cmd_valid,
  input  logic    [NUM_CLP-1:0][NRD-1:0]      rd_cmd_ready,
  input  word_t   [NUM_CLP-1:0][NRD-1:0]      rd_data,
  input  logic    [NUM_CLP-1:0][NRD-1:0]      rd_valid,
  output logic    [NUM_CLP-1:0][NRD-1:0]      rd_ready,
  // memory write channels
  output dm_cmd_t [NUM_CLP-1:0][MP-1:0]       wr_cmd,
  output logic    [NUM_CLP-1:0][MP-1:0]       wr_cmd_valid,
  input  logic    [NUM_CLP-1:0][MP-1:0]       wr_cmd_ready,
  output word_t   [NUM_CLP-1:0][MP-1:0]       wr_data,
  output logic    [NUM_CLP-1:0][MP-1:0]       wr_valid,
  input  logic    [NUM_CLP-1:0][MP-1:0]       wr_ready
);

  logic [NUM_CLP-1:0][7:0]  awaddr;
  logic [NUM_CLP-1:0]       awvalid, awready, wvalid, wready, bvalid, bready, done;
  logic [NUM_CLP-1:0][31:0] wdata;

  epoch_sched #(.NUM_CLP(NUM_CLP), .MAX_JOBS(MAX_JOBS)) u_sched (
    .clk, .rst_n, .tbl_we, .tbl_clp, .tbl_idx, .tbl_job, .nj_we, .nj_clp, .nj_val,
    .epoch_start, .epoch_busy, .epoch_done, .epoch_count,
    .m_awaddr(awaddr), .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata),
    .m_wvalid(wvalid), .m_wready(wready), .m_bvalid(bvalid), .m_bready(bready),
    .clp_done(done)
  );

  for (genvar i = 0; i < NUM_CLP; i++) begin : g_clp
    logic [1:0]  bresp, rresp;
    logic [31:0] rdata;
    logic        arready, rvalid;
    clp #(
      .TN(TN[i]), .TM(TM[i]), .KMAX(KMAX[i]), .MMAX(MMAX[i]),
      .IN_SIZE(IN_SIZE[i]), .OUT_SIZE(OUT_SIZE[i]), .NP(NP), .WP(WP), .MP(MP)
    ) u_clp (
      .clk, .rst_n,
      .s_awaddr(awaddr[i]), .s_awvalid(awvalid[i]), .s_awready(awready[i]),
      .s_wdata(wdata[i]), .s_wstrb(4'hF), .s_wvalid(wvalid[i]), .s_wready(wready[i]),
      .s_bresp(bresp), .s_bvalid(bvalid[i]), .s_bready(bready[i]),
      .s_araddr(8'd0), .s_arvalid(1'b0), .s_arready(arready), .s_rdata(rdata),
      .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(1'b1), .done(done[i]),
      .dsc_cmd(rd_cmd[i][0]), .dsc_cmd_valid(rd_cmd_valid[i][0]),
      .dsc_cmd_ready(rd_cmd_ready[i][0]), .dsc_data(rd_data[i][0]),
      .dsc_valid(rd_valid[i][0]), .dsc_ready(rd_ready[i][0]),
      .in_cmd(rd_cmd[i][NP:1]), .in_cmd_valid(rd_cmd_valid[i][NP:1]),
      .in_cmd_ready(rd_cmd_ready[i][NP:1]), .in_data(rd_data[i][NP:1]),
      .in_valid(rd_valid[i][NP:1]), .in_ready(rd_ready[i][NP:1]),
      .wt_cmd(rd_cmd[i][NRD-1:NP+1]), .wt_cmd_valid(rd_cmd_valid[i][NRD-1:NP+1]),
      .wt_cmd_ready(rd_cmd_ready[i][NRD-1:NP+1]), .wt_data(rd_data[i][NRD-1:NP+1]),
      .wt_valid(rd_valid[i][NRD-1:NP+1]), .wt_ready(rd_ready[i][NRD-1:NP+1]),
      .out_cmd(wr_cmd[i]), .out_cmd_valid(wr_cmd_valid[i]), .out_cmd_ready(wr_cmd_ready[i]),
      .out_data(wr_data[i]), .out_valid(wr_valid[i]), .out_ready(wr_ready[i])
    );
  end

endmodule
