// tb_workload_tail: the classifier tail of the all-polynomial CIFAR-10
// ResNet-18/34 backbones, run completely on two rrnet_2pc_core instances at
// their default sizes: global average pooling of a 4x4x512 activation,
// then a fully connected layer 512 -> 10. The activation shares are handed
// out by the testbench as if they came from the previous layer; server 1
// owns the FC weights and shares them with OP_SHR. Average pooling is 15
// chained OP_LIN commands (a = 1) that add the 16 pixels channel by
// channel, then one OP_LIN with a public scale s (the fixed-point code of
// 1/16 chosen by the host; here a random ring element). The FC layer is
// MASK E on the pooled vector, MASK F on the weights, and OP_MATMUL with
// K = 512 over three 4-column segments (10 outputs padded to 12 with zero
// weights). The logits are opened with OP_REC and compared with a plaintext
// model; the pooled shares and the matmul cycle count (3*(4K+1)+5) are
// checked as well. Streams run without random stalls.
module tb_workload_tail;
  import rr_pkg::*;
  localparam int W = RING_W, L = LANES;
  localparam int NPX = 16, CH = 512, NCV = CH / L;   // 128 channel vectors
  localparam int NO = 10, NOP = 12, NS = NOP / L;    // 3 output segments
  localparam int K = CH;
  typedef logic [L-1:0][W-1:0] beat_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, fail_prints = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (fail_prints < 20) begin fail_prints++; $display("FAIL %s", what); end
    end
  endtask

  logic  cmd_valid[2], cmd_ready[2], done[2];
  cmd_t  cmd[2];
  logic  ld_valid[2], ld_ready[2], st_valid[2], st_ready[2];
  beat_t ld_data[2], st_data[2];
  logic  tx_valid[2], tx_ready[2], rx_valid[2], rx_ready[2];
  beat_t tx_data[2], rx_data[2];

  for (genvar p = 0; p < 2; p++) begin : g_srv
    rrnet_2pc_core u_core (
      .clk, .rst_n, .party(1'(p)),
      .cmd_valid(cmd_valid[p]), .cmd_ready(cmd_ready[p]), .cmd(cmd[p]), .done(done[p]),
      .ld_valid(ld_valid[p]), .ld_ready(ld_ready[p]), .ld_data(ld_data[p]),
      .st_valid(st_valid[p]), .st_ready(st_ready[p]), .st_data(st_data[p]),
      .tx_valid(tx_valid[p]), .tx_ready(tx_ready[p]), .tx_data(tx_data[p]),
      .rx_valid(rx_valid[p]), .rx_ready(rx_ready[p]), .rx_data(rx_data[p])
    );
    tb_link_model #(.W(W), .L(L), .LATENCY(8), .RANDOM_READY(1'b0)) u_link (
      .clk, .rst_n,
      .in_valid(tx_valid[p]), .in_ready(tx_ready[p]), .in_data(tx_data[p]),
      .out_valid(rx_valid[1-p]), .out_ready(rx_ready[1-p]), .out_data(rx_data[1-p])
    );
  end

  beat_t  ldq[2][$], stq[2][$];
  bit     done_seen[2];
  longint cyc = 0, acc_cyc[2], done_cyc[2];

  always @(posedge clk) cyc <= cyc + 1;

  for (genvar p = 0; p < 2; p++) begin : g_host
    always @(posedge clk) begin
      if (!rst_n) begin
        ld_valid[p] <= 1'b0; st_ready[p] <= 1'b0; cmd_valid[p] <= 1'b0;
      end else begin
        if (!ld_valid[p] || ld_ready[p]) begin
          if (ldq[p].size() > 0) begin
            ld_valid[p] <= 1'b1;
            ld_data[p]  <= ldq[p].pop_front();
          end else begin
            ld_valid[p] <= 1'b0;
          end
        end
        if (st_valid[p] && st_ready[p]) stq[p].push_back(st_data[p]);
        st_ready[p] <= 1'b1;
        if (cmd_valid[p] && cmd_ready[p]) begin cmd_valid[p] <= 1'b0; acc_cyc[p] <= cyc; end
        if (done[p]) begin done_seen[p] <= 1'b1; done_cyc[p] <= cyc; end
      end
    end
  end

  function automatic cmd_t mk(op_e op, int count, int kdim = 1, logic [W-1:0] a = '0,
                              logic [W-1:0] k1 = '0, logic [W-1:0] w2 = '0,
                              logic [W-1:0] b = '0);
    cmd_t c;
    c.op = op; c.count = CNT_W'(count); c.kdim = CNT_W'(kdim);
    c.a = a; c.k1 = k1; c.w2 = w2; c.b = b;
    return c;
  endfunction

  task automatic run(input cmd_t c0, input cmd_t c1, output beat_t out0[$],
                     output beat_t out1[$], output longint cyc0);
    @(posedge clk);
    done_seen[0] <= 0; done_seen[1] <= 0;
    cmd[0] <= c0; cmd[1] <= c1;
    cmd_valid[0] <= 1; cmd_valid[1] <= 1;
    @(posedge clk);
    wait (done_seen[0] && done_seen[1]);
    @(posedge clk);
    cyc0 = done_cyc[0] - acc_cyc[0];
    out0 = stq[0]; out1 = stq[1];
    stq[0].delete(); stq[1].delete();
    check(out0.size() == int'(c0.count) && out1.size() == int'(c1.count), "one store per output vector");
  endtask

  function automatic logic [W-1:0] mul(logic [W-1:0] a, logic [W-1:0] b);
    return W'(longint'(a) * longint'(b));
  endfunction

  logic [W-1:0] h[NPX][CH], h0[NPX][CH], acc0[CH], acc1[CH], sum[CH], pooled[CH], P0[CH], P1[CH];
  logic [W-1:0] A[CH], A0[CH], E[CH];
  logic [W-1:0] wt[K][NOP], wt_r[K][NOP], Y0[K][NOP], Y1[K][NOP], B[K][NOP], B0[K][NOP], F[K][NOP];
  logic [W-1:0] Z[NOP], Z0[NOP], logit[NOP];

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    beat_t o0[$], o1[$], bt;
    longint c0;
    logic [W-1:0] sc;

    for (int p = 0; p < 2; p++) begin
      cmd[p] = '0; ld_data[p] = '0; done_seen[p] = 0; acc_cyc[p] = 0; done_cyc[p] = 0;
    end
    sc = $urandom;
    for (int c = 0; c < CH; c++) begin
      sum[c] = '0;
      for (int px = 0; px < NPX; px++) begin
        h[px][c] = $urandom; h0[px][c] = $urandom; sum[c] = sum[c] + h[px][c];
      end
      pooled[c] = mul(sc, sum[c]);
      A[c] = $urandom; A0[c] = $urandom;
    end
    for (int k = 0; k < K; k++) for (int o = 0; o < NOP; o++) begin
      wt[k][o] = (o < NO) ? $urandom : '0;
      wt_r[k][o] = $urandom; B[k][o] = $urandom; B0[k][o] = $urandom;
    end
    for (int o = 0; o < NOP; o++) begin
      Z[o] = '0; logit[o] = '0; Z0[o] = $urandom;
      for (int k = 0; k < K; k++) begin
        Z[o] = Z[o] + mul(A[k], B[k][o]);
        logit[o] = logit[o] + mul(pooled[k], wt[k][o]);
      end
    end

    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // global average pooling: running sum over the 16 pixels
    for (int c = 0; c < CH; c++) begin acc0[c] = h0[0][c]; acc1[c] = h[0][c] - h0[0][c]; end
    for (int px = 1; px < NPX; px++) begin
      for (int p = 0; p < 2; p++) for (int v = 0; v < NCV; v++) begin
        for (int l = 0; l < L; l++) bt[l] = p ? acc1[v*L+l] : acc0[v*L+l]; ldq[p].push_back(bt);
        for (int l = 0; l < L; l++) bt[l] = p ? h[px][v*L+l] - h0[px][v*L+l] : h0[px][v*L+l];
        ldq[p].push_back(bt);
      end
      run(mk(OP_LIN, NCV, 1, W'(1)), mk(OP_LIN, NCV, 1, W'(1)), o0, o1, c0);
      for (int v = 0; v < NCV; v++) for (int l = 0; l < L; l++) begin
        acc0[v*L+l] = o0[v][l]; acc1[v*L+l] = o1[v][l];
      end
    end
    for (int c = 0; c < CH; c++) check(acc0[c] + acc1[c] == sum[c], "pooling sum");
    // scale by the public 1/16 code
    for (int p = 0; p < 2; p++) for (int v = 0; v < NCV; v++) begin
      for (int l = 0; l < L; l++) bt[l] = p ? acc1[v*L+l] : acc0[v*L+l]; ldq[p].push_back(bt);
      ldq[p].push_back('0);
    end
    run(mk(OP_LIN, NCV, 1, sc), mk(OP_LIN, NCV, 1, sc), o0, o1, c0);
    for (int v = 0; v < NCV; v++) for (int l = 0; l < L; l++) begin
      P0[v*L+l] = o0[v][l]; P1[v*L+l] = o1[v][l];
      check(P0[v*L+l] + P1[v*L+l] == pooled[v*L+l], "pooled output");
    end

    // FC weights from server 1, vector k*NS + s
    for (int k = 0; k < K; k++) for (int s = 0; s < NS; s++) begin
      for (int l = 0; l < L; l++) bt[l] = wt[k][s*L+l];   ldq[1].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = wt_r[k][s*L+l]; ldq[1].push_back(bt);
    end
    run(mk(OP_RCV, K*NS), mk(OP_SHR, K*NS), o0, o1, c0);
    for (int k = 0; k < K; k++) for (int s = 0; s < NS; s++) for (int l = 0; l < L; l++) begin
      Y0[k][s*L+l] = o0[k*NS+s][l]; Y1[k][s*L+l] = o1[k*NS+s][l];
      check(Y0[k][s*L+l] + Y1[k][s*L+l] == wt[k][s*L+l], "weight shares");
    end

    // E = pooled - A
    for (int p = 0; p < 2; p++) for (int v = 0; v < NCV; v++) begin
      for (int l = 0; l < L; l++) bt[l] = p ? P1[v*L+l] : P0[v*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? A[v*L+l] - A0[v*L+l] : A0[v*L+l]; ldq[p].push_back(bt);
    end
    run(mk(OP_MASK, NCV), mk(OP_MASK, NCV), o0, o1, c0);
    for (int v = 0; v < NCV; v++) for (int l = 0; l < L; l++) begin
      E[v*L+l] = o0[v][l];
      check(o0[v][l] == pooled[v*L+l] - A[v*L+l], "E opened");
    end

    // F = weights - B
    for (int p = 0; p < 2; p++) for (int k = 0; k < K; k++) for (int s = 0; s < NS; s++) begin
      for (int l = 0; l < L; l++) bt[l] = p ? Y1[k][s*L+l] : Y0[k][s*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? B[k][s*L+l] - B0[k][s*L+l] : B0[k][s*L+l];
      ldq[p].push_back(bt);
    end
    run(mk(OP_MASK, K*NS), mk(OP_MASK, K*NS), o0, o1, c0);
    for (int k = 0; k < K; k++) for (int s = 0; s < NS; s++) for (int l = 0; l < L; l++) begin
      F[k][s*L+l] = o0[k*NS+s][l];
      check(o0[k*NS+s][l] == wt[k][s*L+l] - B[k][s*L+l], "F opened");
    end

    // FC as MATMUL, K = 512
    for (int p = 0; p < 2; p++) for (int s = 0; s < NS; s++) for (int k = 0; k < K; k++) begin
      bt = '0; bt[0] = p ? P1[k] : P0[k]; bt[1] = E[k]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = F[k][s*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? Y1[k][s*L+l] : Y0[k][s*L+l]; ldq[p].push_back(bt);
      if (k == 0) begin
        for (int l = 0; l < L; l++) bt[l] = p ? Z[s*L+l] - Z0[s*L+l] : Z0[s*L+l];
        ldq[p].push_back(bt);
      end
    end
    run(mk(OP_MATMUL, NS, K), mk(OP_MATMUL, NS, K), o0, o1, c0);
    check(c0 == longint'(NS*(4*K + 1) + 5), "MATMUL cycles = count*(4K+1)+5");
    $display("FC MATMUL: %0d output vectors, K=%0d, %0d cycles", NS, K, c0);

    // open the logits
    for (int p = 0; p < 2; p++) for (int s = 0; s < NS; s++) ldq[p].push_back(p ? o1[s] : o0[s]);
    run(mk(OP_REC, NS), mk(OP_REC, NS), o0, o1, c0);
    for (int s = 0; s < NS; s++) for (int l = 0; l < L; l++)
      check(o0[s][l] == logit[s*L+l] && o1[s][l] == logit[s*L+l], "logit");
    $display("tail done at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
