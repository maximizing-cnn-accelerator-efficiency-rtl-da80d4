// tb_multi_clp_top: end-to-end test of the Multi-CLP accelerator at its default size.
//
// The four CLPs of the default configuration are given small layers that fit their buffers,
// and two epochs are run through the epoch scheduler:
//   epoch 0: CLP2 runs layer A on image 0; the other CLPs have no work.
//   epoch 1: CLP2 runs layer A on image 1, CLP3 runs layer B on the output that layer A
//            produced for image 0 in epoch 0 (data handed from one epoch to the next),
//            CLP1 runs layer C, CLP0 runs layers D and E one after the other.
// Inputs, weights and biases are small integers stored as floats, so all float sums are
// exact; every output word is compared with an integer convolution computed here from the
// memory contents. The test also counts the mechanisms of the design and fails if one never
// happened: epochs, a CLP with several layers in an epoch, a CLP with none, loads overlapped
// with compute (input ping-pong), write-out overlapped with compute (output ping-pong),
// edge tiles smaller than Tr x Tc, layers with more than one output-map group, and memory
// back-pressure. The compute cycles of each layer are checked against
// R*C*ceil(N/Tn)*ceil(M/Tm)*K*K.
module tb_multi_clp_top;
  import clp_pkg::*;

  localparam int NUM_CLP = 4, NRD = 3, MP = 1;
  localparam int TNv [4] = '{2, 1, 3, 8};
  localparam int TMv [4] = '{64, 96, 24, 19};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        tbl_we, nj_we, epoch_start, epoch_busy, epoch_done;
  logic [1:0]  tbl_clp, nj_clp;
  logic [2:0]  tbl_idx;
  logic [3:0]  nj_val;
  job_t        tbl_job;
  logic [31:0] epoch_count;
  dm_cmd_t [NUM_CLP-1:0][NRD-1:0] rd_cmd;
  logic    [NUM_CLP-1:0][NRD-1:0] rd_cmd_valid, rd_cmd_ready, rd_valid, rd_ready;
  word_t   [NUM_CLP-1:0][NRD-1:0] rd_data;
  dm_cmd_t [NUM_CLP-1:0][MP-1:0]  wr_cmd;
  logic    [NUM_CLP-1:0][MP-1:0]  wr_cmd_valid, wr_cmd_ready, wr_valid, wr_ready;
  word_t   [NUM_CLP-1:0][MP-1:0]  wr_data;

  multi_clp_top dut (
    .clk, .rst_n, .tbl_we, .tbl_clp, .tbl_idx, .tbl_job, .nj_we, .nj_clp, .nj_val,
    .epoch_start, .epoch_busy, .epoch_done, .epoch_count,
    .rd_cmd, .rd_cmd_valid, .rd_cmd_ready, .rd_data, .rd_valid, .rd_ready,
    .wr_cmd, .wr_cmd_valid, .wr_cmd_ready, .wr_data, .wr_valid, .wr_ready
  );

  mem_model #(.NRD(NUM_CLP * NRD), .NWR(NUM_CLP * MP), .MEM_WORDS(65536), .STALL(1)) u_mem (
    .clk, .rst_n, .rd_cmd, .rd_cmd_valid, .rd_cmd_ready, .rd_data, .rd_valid, .rd_ready,
    .wr_cmd, .wr_cmd_valid, .wr_cmd_ready, .wr_data, .wr_valid, .wr_ready
  );

  // ------------------------------------------------------------ mechanism counters
  longint issues [4];
  int n_overlap_ld = 0, n_overlap_wr = 0, n_edge = 0, n_mgroups = 0, n_stall = 0;
  logic [3:0] ld_b, cp_b, wr_b, edge_t, mg;
  assign ld_b = {dut.g_clp[3].u_clp.ld_busy, dut.g_clp[2].u_clp.ld_busy,
                 dut.g_clp[1].u_clp.ld_busy, dut.g_clp[0].u_clp.ld_busy};
  assign cp_b = {dut.g_clp[3].u_clp.cp_busy, dut.g_clp[2].u_clp.cp_busy,
                 dut.g_clp[1].u_clp.cp_busy, dut.g_clp[0].u_clp.cp_busy};
  assign wr_b = {dut.g_clp[3].u_clp.wr_busy, dut.g_clp[2].u_clp.wr_busy,
                 dut.g_clp[1].u_clp.wr_busy, dut.g_clp[0].u_clp.wr_busy};
  assign edge_t = {
    dut.g_clp[3].u_clp.cp_start && (dut.g_clp[3].u_clp.cp_rloops < dut.g_clp[3].u_clp.desc.tr),
    dut.g_clp[2].u_clp.cp_start && (dut.g_clp[2].u_clp.cp_rloops < dut.g_clp[2].u_clp.desc.tr),
    dut.g_clp[1].u_clp.cp_start && (dut.g_clp[1].u_clp.cp_rloops < dut.g_clp[1].u_clp.desc.tr),
    dut.g_clp[0].u_clp.cp_start && (dut.g_clp[0].u_clp.cp_rloops < dut.g_clp[0].u_clp.desc.tr)};
  assign mg = {dut.g_clp[3].u_clp.wr_start && dut.g_clp[3].u_clp.wr_m != 0,
               dut.g_clp[2].u_clp.wr_start && dut.g_clp[2].u_clp.wr_m != 0,
               dut.g_clp[1].u_clp.wr_start && dut.g_clp[1].u_clp.wr_m != 0,
               dut.g_clp[0].u_clp.wr_start && dut.g_clp[0].u_clp.wr_m != 0};
  always @(posedge clk) begin
    if (dut.g_clp[0].u_clp.cp_issue) issues[0]++;
    if (dut.g_clp[1].u_clp.cp_issue) issues[1]++;
    if (dut.g_clp[2].u_clp.cp_issue) issues[2]++;
    if (dut.g_clp[3].u_clp.cp_issue) issues[3]++;
    if (|(ld_b & cp_b)) n_overlap_ld++;
    if (|(wr_b & cp_b)) n_overlap_wr++;
    if (|edge_t) n_edge++;
    if (|mg) n_mgroups++;
    if (|(rd_ready & ~rd_valid)) n_stall++;
  end

  // ------------------------------------------------------------ helpers
  function automatic logic [31:0] i2f(input int v);
    int unsigned a;
    int p;
    if (v == 0) return 32'd0;
    a = (v < 0) ? -v : v;
    p = 0;
    for (int b = 0; b < 32; b++) if (a[b]) p = b;
    return {(v < 0), 8'(127 + p), 23'((a << (23 - p)) & 32'h7F_FFFF)};
  endfunction

  function automatic int f2i(input logic [31:0] f);
    int e;
    int unsigned m;
    if (f[30:23] == 0) return 0;
    e = int'(f[30:23]) - 127;
    m = {9'd1, f[22:0]};
    m = m >> (23 - e);
    return f[31] ? -int'(m) : int'(m);
  endfunction

  typedef struct {
    int r, c, m, n, k, s, tr, tc;
    int dsc, ib, wb, bb, ob;   // word addresses
  } lay_t;

  function automatic lay_t mk(input int r, c, m, n, k, s, tr, tc, base, ib);
    lay_t l;
    l.r = r; l.c = c; l.m = m; l.n = n; l.k = k; l.s = s; l.tr = tr; l.tc = tc;
    l.dsc = base; l.bb = base + 8; l.wb = base + 256; l.ob = base + 2048;
    l.ib = ib;
    return l;
  endfunction

  // descriptor, weights, biases and (if fill) input of a layer
  task automatic put_layer(input lay_t l, input bit fill);
    int hin, win;
    hin = (l.r - 1) * l.s + l.k;
    win = (l.c - 1) * l.s + l.k;
    u_mem.mem[l.dsc + 0] = l.r;  u_mem.mem[l.dsc + 1] = l.c;
    u_mem.mem[l.dsc + 2] = l.m;  u_mem.mem[l.dsc + 3] = l.n;
    u_mem.mem[l.dsc + 4] = l.k;  u_mem.mem[l.dsc + 5] = l.s;
    u_mem.mem[l.dsc + 6] = l.tr; u_mem.mem[l.dsc + 7] = l.tc;
    for (int x = 0; x < l.m; x++) u_mem.mem[l.bb + x] = i2f(int'($urandom % 11) - 5);
    for (int x = 0; x < l.m * l.n * l.k * l.k; x++)
      u_mem.mem[l.wb + x] = i2f(int'($urandom % 5) - 2);
    if (fill) for (int x = 0; x < l.n * hin * win; x++)
      u_mem.mem[l.ib + x] = i2f(int'($urandom % 7) - 3);
    for (int x = 0; x < l.m * l.r * l.c; x++) u_mem.mem[l.ob + x] = 32'h7F80_0001;
  endtask

  task automatic check_layer(input string name, input lay_t l);
    int hin, win, bad;
    hin = (l.r - 1) * l.s + l.k;
    win = (l.c - 1) * l.s + l.k;
    bad = 0;
    for (int m = 0; m < l.m; m++)
      for (int r = 0; r < l.r; r++)
        for (int c = 0; c < l.c; c++) begin
          int acc;
          logic [31:0] g, e;
          acc = f2i(u_mem.mem[l.bb + m]);
          for (int n = 0; n < l.n; n++)
            for (int i = 0; i < l.k; i++)
              for (int j = 0; j < l.k; j++)
                acc += f2i(u_mem.mem[l.wb + ((m * l.n + n) * l.k + i) * l.k + j]) *
                       f2i(u_mem.mem[l.ib + (n * hin + l.s * r + i) * win + l.s * c + j]);
          g = u_mem.mem[l.ob + (m * l.r + r) * l.c + c];
          e = i2f(acc);
          checks++;
          if (!(g == e || (g[30:0] == 0 && e[30:0] == 0))) begin
            failures++;
            bad++;
            if (bad < 5) $display("FAIL: %s O[%0d][%0d][%0d] = %h expected %h", name, m, r, c, g, e);
          end
        end
    $display("%s: %0d outputs checked, %0d wrong", name, l.m * l.r * l.c, bad);
  endtask

  task automatic set_job(input int clp_i, input int idx, input lay_t l);
    @(negedge clk);
    tbl_we = 1; tbl_clp = 2'(clp_i); tbl_idx = 3'(idx);
    tbl_job.desc = 32'(l.dsc * 4); tbl_job.ibase = 32'(l.ib * 4); tbl_job.wbase = 32'(l.wb * 4);
    tbl_job.bbase = 32'(l.bb * 4); tbl_job.obase = 32'(l.ob * 4);
    @(negedge clk);
    tbl_we = 0;
  endtask

  task automatic set_njobs(input int clp_i, input int n);
    @(negedge clk);
    nj_we = 1; nj_clp = 2'(clp_i); nj_val = 4'(n);
    @(negedge clk);
    nj_we = 0;
  endtask

  function automatic longint model_cycles(input lay_t l, input int ci);
    return longint'(l.r) * l.c * ((l.n + TNv[ci] - 1) / TNv[ci]) *
           ((l.m + TMv[ci] - 1) / TMv[ci]) * l.k * l.k;
  endfunction

  task automatic run_epoch(input longint exp_cyc [4]);
    longint i0 [4];
    int ep0;
    for (int i = 0; i < 4; i++) i0[i] = issues[i];
    ep0 = int'(epoch_count);
    @(negedge clk);
    epoch_start = 1;
    @(negedge clk);
    epoch_start = 0;
    while (!epoch_done) @(posedge clk);
    @(negedge clk);
    checks++;
    if (int'(epoch_count) != ep0 + 1) begin
      failures++;
      $display("FAIL: epoch count %0d", epoch_count);
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (issues[i] - i0[i] != exp_cyc[i]) begin
        failures++;
        $display("FAIL: CLP%0d compute cycles %0d expected %0d", i, issues[i] - i0[i], exp_cyc[i]);
      end
    end
  endtask

  // ------------------------------------------------------------ test
  lay_t a0, a1, b0, cc, d, e;
  longint ex [4];

  initial begin
    tbl_we = 0; nj_we = 0; epoch_start = 0; tbl_clp = 0; tbl_idx = 0; tbl_job = '0;
    nj_clp = 0; nj_val = 0;
    for (int i = 0; i < 4; i++) issues[i] = 0;
    // layer A (CLP2) writes image i's maps to its own output area
    a0 = mk(4, 4, 8, 3, 3, 2, 2, 3, 0,     4096);
    a1 = mk(4, 4, 8, 3, 3, 2, 2, 3, 8192,  12288);
    a1.wb = a0.wb; a1.bb = a0.bb; a1.dsc = a0.dsc;
    // layer B (CLP3) reads layer A's output of the previous epoch
    b0 = mk(2, 2, 20, 8, 3, 1, 2, 2, 16384, a0.ob);
    cc = mk(3, 3, 5, 2, 3, 1, 2, 3, 24576, 28672);
    d  = mk(3, 3, 4, 3, 1, 1, 3, 3, 32768, 36864);
    e  = mk(2, 3, 66, 2, 3, 1, 1, 3, 40960, 45056);
    put_layer(a0, 1);
    put_layer(a1, 1);
    a1.wb = a0.wb; a1.bb = a0.bb;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // epoch 0: only CLP2 has work
    set_job(2, 0, a0);
    set_njobs(2, 1);
    ex = '{0, 0, model_cycles(a0, 2), 0};
    run_epoch(ex);
    check_layer("epoch0 A(img0) on CLP2", a0);

    // epoch 1: everything in flight
    put_layer(b0, 0);
    put_layer(cc, 1);
    put_layer(d, 1);
    put_layer(e, 1);
    set_job(2, 0, a1);
    set_job(3, 0, b0);
    set_job(1, 0, cc);
    set_job(0, 0, d);
    set_job(0, 1, e);
    set_njobs(3, 1);
    set_njobs(1, 1);
    set_njobs(0, 2);
    ex = '{model_cycles(d, 0) + model_cycles(e, 0), model_cycles(cc, 1), model_cycles(a1, 2),
           model_cycles(b0, 3)};
    run_epoch(ex);
    check_layer("epoch1 A(img1) on CLP2", a1);
    check_layer("epoch1 B(img0) on CLP3", b0);
    check_layer("epoch1 C on CLP1", cc);
    check_layer("epoch1 D on CLP0", d);
    check_layer("epoch1 E on CLP0", e);

    // mechanisms
    $display("epochs=%0d load/compute overlap=%0d write/compute overlap=%0d edge tiles=%0d",
             epoch_count, n_overlap_ld, n_overlap_wr, n_edge);
    $display("m-group write-outs=%0d memory stall cycles=%0d", n_mgroups, n_stall);
    checks++; if (epoch_count != 2) failures++;
    checks++; if (n_overlap_ld == 0) begin failures++; $display("FAIL: no load overlap"); end
    checks++; if (n_overlap_wr == 0) begin failures++; $display("FAIL: no write overlap"); end
    checks++; if (n_edge == 0) begin failures++; $display("FAIL: no edge tile"); end
    checks++; if (n_mgroups == 0) begin failures++; $display("FAIL: no second m group"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL: no memory stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
