// clp_layer_runner: drives one CLP through a list of full-size layers and checks them.
//
// Used by the AlexNet workload test. It holds a CLP with the given shape and buffer
// sizes, a memory model without stalls, and an AXI4-Lite driver. For each layer (the
// first NL entries of the L_R, L_C, ... arrays, at most two) it writes random small-integer
// inputs, weights and biases to memory as floats. It starts the CLP through its registers and waits for done.
// Then it compares every output word with an integer reference convolution; small integers
// keep every float sum exact, so outputs must match bit for bit. It also checks the compute
// cycles against R*C*ceil(N/Tn)*ceil(M/Tm)*K*K and against the cycle count expected for
// the layer (L_CYC).
// Outputs: finished rises when all layers are done; checks/failures hold the totals.
// Memory map per layer (word addresses): descriptor 0, biases 64, weights 1024, inputs
// right after the weights, outputs right after the inputs.
module clp_layer_runner
  import clp_pkg::*;
#(
  parameter int TN        = 2,
  parameter int TM        = 64,
  parameter int KMAX      = 3,
  parameter int MMAX      = 192,
  parameter int IN_SIZE   = 225,
  parameter int OUT_SIZE  = 169,
  parameter int MEM_WORDS = 524288,
  parameter int NL        = 1,
  parameter int L_R   [2] = '{13, 13},
  parameter int L_C   [2] = '{13, 13},
  parameter int L_M   [2] = '{128, 128},
  parameter int L_N   [2] = '{192, 192},
  parameter int L_K   [2] = '{3, 3},
  parameter int L_S   [2] = '{1, 1},
  parameter int L_TR  [2] = '{13, 13},
  parameter int L_TC  [2] = '{13, 13},
  parameter int L_CYC [2] = '{292032, 292032}
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);

  localparam int DESC_W = 0, BIAS_W = 64, W_W = 1024;

  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready;
  logic        rvalid, rready, done;
  logic [31:0] wdata, rdata;
  logic [1:0]  bresp, rresp;

  dm_cmd_t [2:0] rd_cmd;
  logic [2:0]    rd_cmd_valid, rd_cmd_ready, rd_valid, rd_ready;
  word_t [2:0]   rd_data;
  dm_cmd_t [0:0] wr_cmd;
  logic [0:0]    wr_cmd_valid, wr_cmd_ready, wr_valid, wr_ready;
  word_t [0:0]   wr_data;

  clp #(.TN(TN), .TM(TM), .KMAX(KMAX), .MMAX(MMAX), .IN_SIZE(IN_SIZE), .OUT_SIZE(OUT_SIZE))
  dut (
    .clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata),
    .s_wstrb(4'hF), .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp), .s_bvalid(bvalid),
    .s_bready(bready), .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready), .done,
    .dsc_cmd(rd_cmd[0]), .dsc_cmd_valid(rd_cmd_valid[0]), .dsc_cmd_ready(rd_cmd_ready[0]),
    .dsc_data(rd_data[0]), .dsc_valid(rd_valid[0]), .dsc_ready(rd_ready[0]),
    .in_cmd(rd_cmd[1:1]), .in_cmd_valid(rd_cmd_valid[1:1]), .in_cmd_ready(rd_cmd_ready[1:1]),
    .in_data(rd_data[1:1]), .in_valid(rd_valid[1:1]), .in_ready(rd_ready[1:1]),
    .wt_cmd(rd_cmd[2:2]), .wt_cmd_valid(rd_cmd_valid[2:2]), .wt_cmd_ready(rd_cmd_ready[2:2]),
    .wt_data(rd_data[2:2]), .wt_valid(rd_valid[2:2]), .wt_ready(rd_ready[2:2]),
    .out_cmd(wr_cmd), .out_cmd_valid(wr_cmd_valid), .out_cmd_ready(wr_cmd_ready),
    .out_data(wr_data), .out_valid(wr_valid), .out_ready(wr_ready)
  );

  mem_model #(.NRD(3), .NWR(1), .MEM_WORDS(MEM_WORDS), .STALL(0)) u_mem (
    .clk, .rst_n, .rd_cmd, .rd_cmd_valid, .rd_cmd_ready, .rd_data, .rd_valid, .rd_ready,
    .wr_cmd, .wr_cmd_valid, .wr_cmd_ready, .wr_data, .wr_valid, .wr_ready
  );

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

  task automatic run_layer(input int R, C, M, N, K, S, Tr, Tc, cyc);
    int hin, win, i_w, o_w, nbad;
    int iv [], wv [], bv [];
    longint issues0, exp_issues;
    hin = (R - 1) * S + K;
    win = (C - 1) * S + K;
    i_w = W_W + M * N * K * K;
    o_w = i_w + N * hin * win;
    u_mem.mem[DESC_W + 0] = R;  u_mem.mem[DESC_W + 1] = C;
    u_mem.mem[DESC_W + 2] = M;  u_mem.mem[DESC_W + 3] = N;
    u_mem.mem[DESC_W + 4] = K;  u_mem.mem[DESC_W + 5] = S;
    u_mem.mem[DESC_W + 6] = Tr; u_mem.mem[DESC_W + 7] = Tc;
    iv = new[N * hin * win];
    wv = new[M * N * K * K];
    bv = new[M];
    foreach (iv[x]) begin iv[x] = int'($urandom % 5) - 2; u_mem.mem[i_w + x] = i2f(iv[x]); end
    foreach (wv[x]) begin wv[x] = int'($urandom % 5) - 2; u_mem.mem[W_W + x] = i2f(wv[x]); end
    foreach (bv[x]) begin bv[x] = int'($urandom % 11) - 5; u_mem.mem[BIAS_W + x] = i2f(bv[x]); end
    for (int x = 0; x < M * R * C; x++) u_mem.mem[o_w + x] = 32'hDEAD_BEEF;
    axil_write(REG_DESC,  DESC_W * 4);
    axil_write(REG_IBASE, i_w * 4);
    axil_write(REG_WBASE, W_W * 4);
    axil_write(REG_BBASE, BIAS_W * 4);
    axil_write(REG_OBASE, o_w * 4);
    issues0 = issues;
    axil_write(REG_CTRL, 32'd1);
    while (!done) @(posedge clk);
    exp_issues = longint'(R) * C * ((N + TN - 1) / TN) * ((M + TM - 1) / TM) * K * K;
    checks += 2;
    if (issues - issues0 != exp_issues || exp_issues != longint'(cyc)) begin
      failures++;
      $display("FAIL: compute cycles %0d, formula %0d, expected %0d", issues - issues0,
               exp_issues, cyc);
    end
    nbad = 0;
    for (int m = 0; m < M; m++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          int acc;
          logic [31:0] g, e;
          acc = bv[m];
          for (int n = 0; n < N; n++)
            for (int i = 0; i < K; i++)
              for (int j = 0; j < K; j++)
                acc += wv[((m * N + n) * K + i) * K + j] *
                       iv[(n * hin + S * r + i) * win + S * c + j];
          g = u_mem.mem[o_w + (m * R + r) * C + c];
          e = i2f(acc);
          if (!(g == e || (g[30:0] == 0 && e[30:0] == 0))) begin
            nbad++;
            if (nbad < 5) $display("FAIL: O[%0d][%0d][%0d] = %h expected %h", m, r, c, g, e);
          end
        end
    checks++;
    if (nbad != 0) begin
      failures++;
      $display("FAIL: %0d of %0d output words wrong", nbad, M * R * C);
    end
    $display("Tn=%0d Tm=%0d layer R=%0d C=%0d M=%0d N=%0d K=%0d S=%0d Tr=%0d Tc=%0d: %0d compute cycles, %0d outputs checked",
             TN, TM, R, C, M, N, K, S, Tr, Tc, issues - issues0, M * R * C);
  endtask

  initial begin
    finished = 0; checks = 0; failures = 0;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0;
    wdata = 0;
    wait (rst_n);
    for (int l = 0; l < NL; l++)
      run_layer(L_R[l], L_C[l], L_M[l], L_N[l], L_K[l], L_S[l], L_TR[l], L_TC[l], L_CYC[l]);
    finished = 1;
  end

endmodule
