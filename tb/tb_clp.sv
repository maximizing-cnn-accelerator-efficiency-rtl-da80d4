// tb_clp: self-checking test of one CLP running whole convolutional layers.
//
// A small CLP (Tn=3, Tm=4, two input, two weight and two output ports) is started through
// its AXI4-Lite registers on four layers chosen to hit every edge case of the tiling:
// partial tiles at the bottom/right edge, N and M that are not multiples of Tn and Tm,
// stride 2, and 1x1 tiles (back-to-back accumulation into one word). Data are small integers
// stored as floats, so every float sum is exact and the expected output is computed with
// integer arithmetic, independently of the design. Checks: every output word, the number of
// compute cycles against R*C*ceil(N/Tn)*ceil(M/Tm)*K*K, and that the CLP reports done.
// The memory model stalls channels at random.
module tb_clp;
  import clp_pkg::*;

  localparam int TN = 3, TM = 4, KMAX = 3, MMAX = 16, IN_SIZE = 128, OUT_SIZE = 16;
  localparam int NP = 2, WP = 2, MP = 2;
  localparam int NRD = 1 + NP + WP;
  localparam int DESC_W = 0, BIAS_W = 64, W_W = 256, I_W = 4096, O_W = 16384;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready;
  logic        rvalid, rready, done;
  logic [31:0] wdata, rdata;
  logic [1:0]  bresp, rresp;

  dm_cmd_t [NRD-1:0] rd_cmd;
  logic [NRD-1:0]    rd_cmd_valid, rd_cmd_ready, rd_valid, rd_ready;
  word_t [NRD-1:0]   rd_data;
  dm_cmd_t [MP-1:0]  wr_cmd;
  logic [MP-1:0]     wr_cmd_valid, wr_cmd_ready, wr_valid, wr_ready;
  word_t [MP-1:0]    wr_data;

  clp #(.TN(TN), .TM(TM), .KMAX(KMAX), .MMAX(MMAX), .IN_SIZE(IN_SIZE), .OUT_SIZE(OUT_SIZE),
        .NP(NP), .WP(WP), .MP(MP)) dut (
    .clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata),
    .s_wstrb(4'hF), .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp), .s_bvalid(bvalid),
    .s_bready(bready), .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready), .done,
    .dsc_cmd(rd_cmd[0]), .dsc_cmd_valid(rd_cmd_valid[0]), .dsc_cmd_ready(rd_cmd_ready[0]),
    .dsc_data(rd_data[0]), .dsc_valid(rd_valid[0]), .dsc_ready(rd_ready[0]),
    .in_cmd(rd_cmd[NP:1]), .in_cmd_valid(rd_cmd_valid[NP:1]), .in_cmd_ready(rd_cmd_ready[NP:1]),
    .in_data(rd_data[NP:1]), .in_valid(rd_valid[NP:1]), .in_ready(rd_ready[NP:1]),
    .wt_cmd(rd_cmd[NRD-1:NP+1]), .wt_cmd_valid(rd_cmd_valid[NRD-1:NP+1]),
    .wt_cmd_ready(rd_cmd_ready[NRD-1:NP+1]), .wt_data(rd_data[NRD-1:NP+1]),
    .wt_valid(rd_valid[NRD-1:NP+1]), .wt_ready(rd_ready[NRD-1:NP+1]),
    .out_cmd(wr_cmd), .out_cmd_valid(wr_cmd_valid), .out_cmd_ready(wr_cmd_ready),
    .out_data(wr_data), .out_valid(wr_valid), .out_ready(wr_ready)
  );

  mem_model #(.NRD(NRD), .NWR(MP), .MEM_WORDS(32768), .STALL(1)) u_mem (
    .clk, .rst_n, .rd_cmd, .rd_cmd_valid, .rd_cmd_ready, .rd_data, .rd_valid, .rd_ready,
    .wr_cmd, .wr_cmd_valid, .wr_cmd_ready, .wr_data, .wr_valid, .wr_ready
  );

  // compute issue cycles
  longint issues = 0;
  always @(posedge clk) if (dut.cp_issue) issues++;

  function automatic logic [31:0] i2f(input int v);
    int unsigned a;
    int p;
    if (v == 0) return 32'd0;
    a = (v < 0) ? -v : v;
    p = 0;
    for (int b = 0; b < 32; b++) if (a[b]) p = b;
    return {(v < 0), 8'(127 + p), 23'((a << (23 - p)) & 32'h7F_FFFF)};
  endfunction

  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!awready);
    @(negedge clk);
    awvalid = 0; wvalid = 0; bready = 1;
    while (!bvalid) @(negedge clk);
    @(negedge clk);
    bready = 0;
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0; rready = 1;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
    rready = 0;
  endtask

  task automatic run_layer(input int R, C, M, N, K, S, Tr, Tc);
    int hin, win, exp_v, got_ok;
    int ref_o [];
    longint issues0, exp_issues;
    logic [31:0] st;
    hin = (R - 1) * S + K;
    win = (C - 1) * S + K;
    u_mem.mem[DESC_W + 0] = R;  u_mem.mem[DESC_W + 1] = C;
    u_mem.mem[DESC_W + 2] = M;  u_mem.mem[DESC_W + 3] = N;
    u_mem.mem[DESC_W + 4] = K;  u_mem.mem[DESC_W + 5] = S;
    u_mem.mem[DESC_W + 6] = Tr; u_mem.mem[DESC_W + 7] = Tc;
    begin
      int iv [], wv [], bv [];
      iv = new[N * hin * win];
      wv = new[M * N * K * K];
      bv = new[M];
      foreach (iv[x]) begin iv[x] = int'($urandom % 7) - 3; u_mem.mem[I_W + x] = i2f(iv[x]); end
      foreach (wv[x]) begin wv[x] = int'($urandom % 5) - 2; u_mem.mem[W_W + x] = i2f(wv[x]); end
      foreach (bv[x]) begin bv[x] = int'($urandom % 11) - 5; u_mem.mem[BIAS_W + x] = i2f(bv[x]); end
      for (int x = 0; x < M * R * C; x++) u_mem.mem[O_W + x] = 32'hDEAD_BEEF;
      ref_o = new[M * R * C];
      for (int m = 0; m < M; m++)
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++) begin
            int acc;
            acc = bv[m];
            for (int n = 0; n < N; n++)
              for (int i = 0; i < K; i++)
                for (int j = 0; j < K; j++)
                  acc += wv[((m * N + n) * K + i) * K + j] *
                         iv[(n * hin + S * r + i) * win + S * c + j];
            ref_o[(m * R + r) * C + c] = acc;
          end
    end
    axil_write(REG_DESC,  DESC_W * 4);
    axil_write(REG_IBASE, I_W * 4);
    axil_write(REG_WBASE, W_W * 4);
    axil_write(REG_BBASE, BIAS_W * 4);
    axil_write(REG_OBASE, O_W * 4);
    issues0 = issues;
    axil_write(REG_CTRL, 32'd1);
    while (!done) @(posedge clk);
    axil_read(REG_CTRL, st);
    checks++;
    if (st[2:1] != 2'b11) begin
      failures++;
      $display("FAIL: CTRL status %b", st[2:0]);
    end
    exp_issues = longint'(R) * C * ((N + TN - 1) / TN) * ((M + TM - 1) / TM) * K * K;
    checks++;
    if (issues - issues0 != exp_issues) begin
      failures++;
      $display("FAIL: compute cycles %0d expected %0d", issues - issues0, exp_issues);
    end
    got_ok = 0;
    for (int x = 0; x < M * R * C; x++) begin
      logic [31:0] g, e;
      g = u_mem.mem[O_W + x];
      e = i2f(ref_o[x]);
      checks++;
      if (!(g == e || (g[30:0] == 0 && e[30:0] == 0))) begin
        failures++;
        if (failures < 10) $display("FAIL: O[%0d] = %h expected %h (%0d)", x, g, e, ref_o[x]);
      end
    end
    $display("layer R=%0d C=%0d M=%0d N=%0d K=%0d S=%0d Tr=%0d Tc=%0d: %0d compute cycles",
             R, C, M, N, K, S, Tr, Tc, issues - issues0);
  endtask

  initial begin
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0;
    wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(5, 6, 7, 5, 3, 1, 2, 4);
    run_layer(3, 3, 4, 3, 2, 2, 3, 3);
    run_layer(2, 2, 5, 7, 1, 1, 1, 1);
    run_layer(4, 3, 9, 2, 3, 2, 3, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
