// epoch_sched: epoch scheduler of the Multi-CLP accelerator.
//
// The accelerator's timeline is divided into epochs. Each CLP owns a static list of layers
// (its jobs); in an epoch every CLP runs its whole list, one layer after another, each layer
// on data produced in the previous epoch, and the epoch ends only when all CLPs have
// finished. This block holds, per CLP, a table of up to MAX_JOBS jobs (descriptor and array
// base addresses) and a job count. On epoch_start it drives each CLP through its AXI4-Lite
// slave: for every job it writes DESC, IBASE, WBASE, BBASE, OBASE and then CTRL.start, and
// waits for that CLP's done. When all CLPs are through their lists it pulses epoch_done and
// increments epoch_count. The host fills the table (tbl_*) and the counts (nj_*) between
// epochs, typically pointing each job at the buffers of a different image in flight.
// AXI4-Lite master timing: AW and W are raised together and each is dropped when accepted;
// the next write waits for the B response.
// Epochs, the barrier and the static layer-to-CLP binding follow the source; the job table
// and driving the CLPs over AXI4-Lite are this design's choices.
module epoch_sched
  import clp_pkg::*;
#(
  parameter int NUM_CLP  = 4,
  parameter int MAX_JOBS = 8,
  localparam int CW = (NUM_CLP > 1) ? $clog2(NUM_CLP) : 1,
  localparam int JW = (MAX_JOBS > 1) ? $clog2(MAX_JOBS) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host side
  input  logic                      tbl_we,
  input  logic [CW-1:0]             tbl_clp,
  input  logic [JW-1:0]             tbl_idx,
  input  job_t                      tbl_job,
  input  logic                      nj_we,
  input  logic [CW-1:0]             nj_clp,
  input  logic [JW:0]               nj_val,
  input  logic                      epoch_start,
  output logic                      epoch_busy,
  output logic                      epoch_done,
  output logic [31:0]               epoch_count,
  // AXI4-Lite masters, one per CLP
  output logic [NUM_CLP-1:0][7:0]   m_awaddr,
  output logic [NUM_CLP-1:0]        m_awvalid,
  input  logic [NUM_CLP-1:0]        m_awready,
  output logic [NUM_CLP-1:0][31:0]  m_wdata,
  output logic [NUM_CLP-1:0]        m_wvalid,
  input  logic [NUM_CLP-1:0]        m_wready,
  input  logic [NUM_CLP-1:0]        m_bvalid,
  output logic [NUM_CLP-1:0]        m_bready,
  input  logic [NUM_CLP-1:0]        clp_done
);

  typedef enum logic [2:0] {J_IDLE, J_NEXT, J_WR, J_RESP, J_RUN, J_FIN} js_e;

  job_t        tbl [NUM_CLP][MAX_JOBS];
  logic [JW:0] njobs [NUM_CLP];
  js_e [NUM_CLP-1:0] st;
  logic [NUM_CLP-1:0] fin;

  always_ff @(posedge clk) begin
    if (tbl_we) tbl[tbl_clp][tbl_idx] <= tbl_job;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < NUM_CLP; i++) njobs[i] <= '0;
    end else if (nj_we) njobs[nj_clp] <= nj_val;

  for (genvar i = 0; i < NUM_CLP; i++) begin : g_clp
    logic [JW:0] j;
    logic [2:0]  reg_k;
    logic        aw_ok, w_ok;
    job_t        cur;
    assign cur    = tbl[i][JW'(j)];
    assign fin[i] = (st[i] == J_FIN);
    always_comb begin
      case (reg_k)
        3'd0:    begin m_awaddr[i] = REG_DESC;  m_wdata[i] = cur.desc;  end
        3'd1:    begin m_awaddr[i] = REG_IBASE; m_wdata[i] = cur.ibase; end
        3'd2:    begin m_awaddr[i] = REG_WBASE; m_wdata[i] = cur.wbase; end
        3'd3:    begin m_awaddr[i] = REG_BBASE; m_wdata[i] = cur.bbase; end
        3'd4:    begin m_awaddr[i] = REG_OBASE; m_wdata[i] = cur.obase; end
        default: begin m_awaddr[i] = REG_CTRL;  m_wdata[i] = 32'd1;     end
      endcase
    end
    assign m_awvalid[i] = (st[i] == J_WR) && !aw_ok;
    assign m_wvalid[i]  = (st[i] == J_WR) && !w_ok;
    assign m_bready[i]  = (st[i] == J_RESP);
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        st[i] <= J_IDLE; j <= '0; reg_k <= '0; aw_ok <= 1'b0; w_ok <= 1'b0;
      end else begin
        case (st[i])
          J_IDLE: if (epoch_start) begin j <= '0; st[i] <= J_NEXT; end
          J_NEXT: if (j == njobs[i]) st[i] <= J_FIN;
                  else begin reg_k <= '0; aw_ok <= 1'b0; w_ok <= 1'b0; st[i] <= J_WR; end
          J_WR: begin
            if (m_awvalid[i] && m_awready[i]) aw_ok <= 1'b1;
            if (m_wvalid[i] && m_wready[i]) w_ok <= 1'b1;
            if ((aw_ok || m_awready[i]) && (w_ok || m_wready[i])) st[i] <= J_RESP;
          end
          J_RESP: if (m_bvalid[i]) begin
            aw_ok <= 1'b0; w_ok <= 1'b0;
            if (reg_k == 3'd5) st[i] <= J_RUN;
            else begin reg_k <= reg_k + 3'd1; st[i] <= J_WR; end
          end
          J_RUN: if (clp_done[i]) begin j <= j + 1; st[i] <= J_NEXT; end
          J_FIN: if (&fin) st[i] <= J_IDLE;
          default: st[i] <= J_IDLE;
        endcase
      end
  end

  assign epoch_busy = (st != '0);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      epoch_done <= 1'b0; epoch_count <= '0;
    end else begin
      epoch_done <= &fin;
      if (&fin) epoch_count <= epoch_count + 1;
    end

  // an epoch is only started while every CLP is idle
  assert property (@(posedge clk) disable iff (!rst_n) epoch_start |-> !epoch_busy);

endmodule
