// tb_axil_regs: self-checking test of the CLP's AXI4-Lite register slave.
//
// Writes each address register and reads it back, checks that a write to CTRL with bit0
// set gives exactly one start pulse while the CLP is idle and none while it is busy, that
// the status bits read back as {idle, done, busy}, and that responses wait for bready and
// rready (held for a few cycles here).
module tb_axil_regs;
  import clp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, starts = 0;

  logic [7:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [1:0] bresp, rresp;
  logic start, done, idle;
  job_t job;

  axil_regs dut (.clk, .rst_n, .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(4'hF), .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp),
    .s_bvalid(bvalid), .s_bready(bready), .s_araddr(araddr), .s_arvalid(arvalid),
    .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid),
    .s_rready(rready), .start, .job, .done, .idle);

  always @(posedge clk) if (start) starts++;

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!awready);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (!bvalid) begin failures++; $display("FAIL: B dropped before bready"); end
    bready = 1;
    @(negedge clk);
    bready = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (!rvalid) begin failures++; $display("FAIL: R dropped before rready"); end
    d = rdata;
    rready = 1;
    @(negedge clk);
    rready = 0;
  endtask

  initial begin
    logic [31:0] v, vals [5];
    logic [7:0] regs [5];
    regs = '{REG_DESC, REG_IBASE, REG_WBASE, REG_BBASE, REG_OBASE};
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0;
    wdata = 0; done = 0; idle = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (regs[i]) begin vals[i] = $urandom; wr(regs[i], vals[i]); end
    foreach (regs[i]) begin
      rd(regs[i], v);
      checks++;
      if (v != vals[i]) begin failures++; $display("FAIL: reg %h = %h expected %h", regs[i], v, vals[i]); end
    end
    checks++;
    if (job != {vals[0], vals[1], vals[2], vals[3], vals[4]}) begin
      failures++; $display("FAIL: job outputs");
    end
    // start while idle: one pulse
    wr(REG_CTRL, 32'd1);
    checks++;
    if (starts != 1) begin failures++; $display("FAIL: %0d start pulses", starts); end
    // start while busy: ignored
    idle = 0;
    wr(REG_CTRL, 32'd1);
    checks++;
    if (starts != 1) begin failures++; $display("FAIL: start accepted while busy"); end
    rd(REG_CTRL, v);
    checks++;
    if (v[2:0] != 3'b001) begin failures++; $display("FAIL: busy status %b", v[2:0]); end
    idle = 1; done = 1;
    rd(REG_CTRL, v);
    checks++;
    if (v[2:0] != 3'b110) begin failures++; $display("FAIL: done status %b", v[2:0]); end
    // writing 0 to CTRL does not start
    wr(REG_CTRL, 32'd0);
    checks++;
    if (starts != 1) begin failures++; $display("FAIL: start without bit0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
