// tb_epoch_sched: self-checking test of the epoch scheduler.
//
// Three stand-in CLPs answer the scheduler's AXI4-Lite writes (accepting AW and W in the
// same cycle, as the CLP slave does) and, after a start, stay busy for a random number of
// cycles before raising done. The test checks that each CLP receives, job after job, the
// five address registers of its table entry followed by a start, that it is never started
// while busy, that CLPs with no jobs are skipped, that epoch_done comes only after every
// CLP has finished all its jobs, and that epoch_count advances once per epoch.
module tb_epoch_sched;
  import clp_pkg::*;
  localparam int NC = 3, MJ = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tbl_we, nj_we, epoch_start, epoch_busy, epoch_done;
  logic [1:0] tbl_clp, nj_clp, tbl_idx;
  logic [2:0] nj_val;
  job_t tbl_job;
  logic [31:0] epoch_count;
  logic [NC-1:0][7:0] awaddr;
  logic [NC-1:0] awvalid, awready, wvalid, wready, bvalid, bready, done;
  logic [NC-1:0][31:0] wdata;

  epoch_sched #(.NUM_CLP(NC), .MAX_JOBS(MJ)) dut (.clk, .rst_n, .tbl_we, .tbl_clp, .tbl_idx,
    .tbl_job, .nj_we, .nj_clp, .nj_val, .epoch_start, .epoch_busy, .epoch_done, .epoch_count,
    .m_awaddr(awaddr), .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata),
    .m_wvalid(wvalid), .m_wready(wready), .m_bvalid(bvalid), .m_bready(bready),
    .clp_done(done));

  job_t jobs [NC][MJ];
  int   njobs [NC];
  int   finished [NC];    // jobs completed in the current epoch
  int   wr_idx [NC];      // register writes seen for the current job

  for (genvar i = 0; i < NC; i++) begin : g_stub
    int busy_left;
    logic running;
    job_t got;
    assign awready[i] = awvalid[i] && wvalid[i] && !bvalid[i];
    assign wready[i]  = awready[i];
    always @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        bvalid[i] <= 0; done[i] <= 0; running <= 0; busy_left <= 0;
      end else begin
        if (awready[i]) begin
          bvalid[i] <= 1;
          case (awaddr[i])
            REG_DESC:  got.desc  = wdata[i];
            REG_IBASE: got.ibase = wdata[i];
            REG_WBASE: got.wbase = wdata[i];
            REG_BBASE: got.bbase = wdata[i];
            REG_OBASE: got.obase = wdata[i];
            REG_CTRL: begin
              checks++;
              if (running) begin failures++; $display("FAIL: CLP%0d started while busy", i); end
              checks++;
              if (wr_idx[i] != 5 || got != jobs[i][finished[i]]) begin
                failures++;
                $display("FAIL: CLP%0d job %0d registers wrong", i, finished[i]);
              end
              running <= 1; done[i] <= 0; busy_left <= 5 + int'($urandom % 40);
            end
            default: begin failures++; $display("FAIL: bad register %h", awaddr[i]); end
          endcase
          wr_idx[i] = (awaddr[i] == REG_CTRL) ? 0 : wr_idx[i] + 1;
        end else if (bvalid[i] && bready[i]) bvalid[i] <= 0;
        if (running) begin
          if (busy_left == 0) begin
            running <= 0; done[i] <= 1; finished[i] = finished[i] + 1;
          end else busy_left <= busy_left - 1;
        end
      end
  end

  task automatic epoch(input int nj0, nj1, nj2);
    int ep;
    njobs = '{nj0, nj1, nj2};
    for (int i = 0; i < NC; i++) begin
      finished[i] = 0; wr_idx[i] = 0;
      for (int j = 0; j < njobs[i]; j++) begin
        jobs[i][j] = {$urandom, $urandom, $urandom, $urandom, $urandom};
        @(negedge clk);
        tbl_we = 1; tbl_clp = 2'(i); tbl_idx = 2'(j); tbl_job = jobs[i][j];
      end
      @(negedge clk);
      tbl_we = 0;
      nj_we = 1; nj_clp = 2'(i); nj_val = 3'(njobs[i]);
      @(negedge clk);
      nj_we = 0;
    end
    ep = int'(epoch_count);
    @(negedge clk);
    epoch_start = 1;
    @(negedge clk);
    epoch_start = 0;
    while (!epoch_done) @(posedge clk);
    for (int i = 0; i < NC; i++) begin
      checks++;
      if (finished[i] != njobs[i]) begin
        failures++;
        $display("FAIL: epoch ended with CLP%0d at %0d of %0d jobs", i, finished[i], njobs[i]);
      end
    end
    @(negedge clk);
    checks++;
    if (int'(epoch_count) != ep + 1 || epoch_busy) begin
      failures++; $display("FAIL: epoch count/busy after epoch");
    end
  endtask

  initial begin
    tbl_we = 0; nj_we = 0; epoch_start = 0; tbl_clp = 0; tbl_idx = 0; tbl_job = '0;
    nj_clp = 0; nj_val = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    epoch(2, 0, 3);
    epoch(1, 1, 1);
    epoch(4, 2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
