// tb_workload_conv1: the first block of the all-polynomial CIFAR-10
// backbones (VGG-16, ResNet-18/34 stem), run completely on two
// rrnet_2pc_core instances at their default sizes:
//     3x3 convolution, 3 -> 64 channels, stride 1, zero padding 1, on a
//     32x32x3 image; per-channel bias; X2act activation.
// Batch-norm scale is taken as folded into the weights, so the bias is added
// with OP_LIN (a = 1). Server 0 owns the image, server 1 the weights. The
// testbench is the host of both servers and the dealer of the Beaver triple
// (A on the image, B on the weights, Z = im2col(A) x B) and of the Beaver
// pair for the activation. Command sequence: SHR/RCV image (768 vectors),
// RCV/SHR weights (27 x 16 row segments), MASK E on the image, MASK F on the
// weights, MATMUL with K = 27 over 1024 pixels x 16 channel segments, LIN
// bias, MASK E2, X2ACT, REC. The convolution input rows are built by the
// host from the image shares and the opened E (im2col). Every output of the
// convolution, the bias step and the opened activations is checked against a
// plaintext convolution computed here; the matmul cycle count is checked
// against 4K + 1 per output vector. Streams run without random stalls to
// keep the run short (the stalls are covered by tb_rrnet_2pc_core).
module tb_workload_conv1;
  import rr_pkg::*;
  localparam int W = RING_W, L = LANES;
  localparam int H = 32, CI = 3, CO = 64, KS = 3;
  localparam int K = KS * KS * CI;      // 27
  localparam int NP = H * H;            // 1024 output pixels
  localparam int NS = CO / L;           // 16 channel segments
  localparam int NIV = H * H * CI / L;  // 768 image vectors
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

  // tensors; image index (y*H + x)*CI + c, weight row k = (ky*KS + kx)*CI + c
  logic [W-1:0] img[NP*CI], img_r[NP*CI], X0[NP*CI], X1[NP*CI], Aimg[NP*CI], Aimg0[NP*CI], E[NP*CI];
  logic [W-1:0] wt[K][CO], wt_r[K][CO], Y0[K][CO], Y1[K][CO], B[K][CO], B0[K][CO], F[K][CO];
  logic [W-1:0] Z[NP][CO], Z0[NP][CO], R[NP][CO], R0[NP][CO], R1[NP][CO];
  logic [W-1:0] bias[CO], bias0[CO], V[NP][CO], V0[NP][CO], V1[NP][CO];
  logic [W-1:0] A2[NP][CO], A20[NP][CO], Z20[NP][CO], E2[NP][CO], Hh[NP][CO], H0[NP][CO], H1[NP][CO];

  // im2col index of pixel pix, row k; -1 for zero padding
  function automatic int src(int pix, int k);
    int py, px, ky, kx, c, yy, xx;
    py = pix / H; px = pix % H;
    c = k % CI; kx = (k / CI) % KS; ky = k / (CI * KS);
    yy = py + ky - 1; xx = px + kx - 1;
    if (yy < 0 || yy >= H || xx < 0 || xx >= H) return -1;
    return (yy * H + xx) * CI + c;
  endfunction

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    beat_t o0[$], o1[$], bt;
    longint c0;
    logic [W-1:0] k1, w2, bb;

    for (int p = 0; p < 2; p++) begin
      cmd[p] = '0; ld_data[p] = '0; done_seen[p] = 0; acc_cyc[p] = 0; done_cyc[p] = 0;
    end
    // data, shares and Beaver material
    for (int i = 0; i < NP*CI; i++) begin
      img[i] = $urandom; img_r[i] = $urandom; Aimg[i] = $urandom; Aimg0[i] = $urandom;
    end
    for (int k = 0; k < K; k++) for (int o = 0; o < CO; o++) begin
      wt[k][o] = $urandom; wt_r[k][o] = $urandom; B[k][o] = $urandom; B0[k][o] = $urandom;
    end
    for (int o = 0; o < CO; o++) begin bias[o] = $urandom; bias0[o] = $urandom; end
    for (int pix = 0; pix < NP; pix++) for (int o = 0; o < CO; o++) begin
      Z[pix][o] = '0; R[pix][o] = '0;
      for (int k = 0; k < K; k++) begin
        int s;
        s = src(pix, k);
        if (s >= 0) begin
          Z[pix][o] = Z[pix][o] + mul(Aimg[s], B[k][o]);
          R[pix][o] = R[pix][o] + mul(img[s], wt[k][o]);
        end
      end
      Z0[pix][o] = $urandom;
      V[pix][o] = R[pix][o] + bias[o];
      A2[pix][o] = $urandom; A20[pix][o] = $urandom; Z20[pix][o] = $urandom;
    end
    k1 = $urandom; w2 = $urandom; bb = $urandom;

    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // 1. image shares
    for (int v = 0; v < NIV; v++) begin
      for (int l = 0; l < L; l++) bt[l] = img[v*L+l];   ldq[0].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = img_r[v*L+l]; ldq[0].push_back(bt);
    end
    run(mk(OP_SHR, NIV), mk(OP_RCV, NIV), o0, o1, c0);
    for (int v = 0; v < NIV; v++) for (int l = 0; l < L; l++) begin
      X0[v*L+l] = o0[v][l]; X1[v*L+l] = o1[v][l];
      check(X0[v*L+l] + X1[v*L+l] == img[v*L+l], "image shares");
    end

    // 2. weight shares, vector k*NS + s
    for (int k = 0; k < K; k++) for (int s = 0; s < NS; s++) begin
      for (int l = 0; l < L; l++) bt[l] = wt[k][s*L+l];   ldq[1].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = wt_r[k][s*L+l]; ldq[1].push_back(bt);
    end
    run(mk(OP_RCV, K*NS), mk(OP_SHR, K*NS), o0, o1, c0);
    for (int k = 0; k < K; k++) for (int s = 0; s < NS; s++) for (int l = 0; l < L; l++) begin
      Y0[k][s*L+l] = o0[k*NS+s][l]; Y1[k][s*L+l] = o1[k*NS+s][l];
      check(Y0[k][s*L+l] + Y1[k][s*L+l] == wt[k][s*L+l], "weight shares");
    end

    // 3. E = image - A
    for (int p = 0; p < 2; p++) for (int v = 0; v < NIV; v++) begin
      for (int l = 0; l < L; l++) bt[l] = p ? X1[v*L+l] : X0[v*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? Aimg[v*L+l] - Aimg0[v*L+l] : Aimg0[v*L+l];
      ldq[p].push_back(bt);
    end
    run(mk(OP_MASK, NIV), mk(OP_MASK, NIV), o0, o1, c0);
    for (int v = 0; v < NIV; v++) for (int l = 0; l < L; l++) begin
      E[v*L+l] = o0[v][l];
      check(o0[v][l] == img[v*L+l] - Aimg[v*L+l] && o1[v][l] == o0[v][l], "E opened");
    end

    // 4. F = weights - B
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

    // 5. convolution as MATMUL, output vector pix*NS + s
    for (int p = 0; p < 2; p++) for (int pix = 0; pix < NP; pix++) for (int s = 0; s < NS; s++)
      for (int k = 0; k < K; k++) begin
        int sx;
        sx = src(pix, k);
        bt = '0;
        if (sx >= 0) begin bt[0] = p ? X1[sx] : X0[sx]; bt[1] = E[sx]; end
        ldq[p].push_back(bt);
        for (int l = 0; l < L; l++) bt[l] = F[k][s*L+l]; ldq[p].push_back(bt);
        for (int l = 0; l < L; l++) bt[l] = p ? Y1[k][s*L+l] : Y0[k][s*L+l]; ldq[p].push_back(bt);
        if (k == 0) begin
          for (int l = 0; l < L; l++) bt[l] = p ? Z[pix][s*L+l] - Z0[pix][s*L+l] : Z0[pix][s*L+l];
          ldq[p].push_back(bt);
        end
      end
    run(mk(OP_MATMUL, NP*NS, K), mk(OP_MATMUL, NP*NS, K), o0, o1, c0);
    check(c0 == longint'(NP*NS*(4*K + 1) + 5), "MATMUL cycles = count*(4K+1)+5");
    $display("conv MATMUL: %0d output vectors, K=%0d, %0d cycles", NP*NS, K, c0);
    for (int pix = 0; pix < NP; pix++) for (int s = 0; s < NS; s++) for (int l = 0; l < L; l++) begin
      R0[pix][s*L+l] = o0[pix*NS+s][l]; R1[pix][s*L+l] = o1[pix*NS+s][l];
      check(R0[pix][s*L+l] + R1[pix][s*L+l] == R[pix][s*L+l], "convolution output");
    end

    // 6. bias with LIN (a = 1)
    for (int p = 0; p < 2; p++) for (int pix = 0; pix < NP; pix++) for (int s = 0; s < NS; s++) begin
      for (int l = 0; l < L; l++) bt[l] = p ? R1[pix][s*L+l] : R0[pix][s*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? bias[s*L+l] - bias0[s*L+l] : bias0[s*L+l];
      ldq[p].push_back(bt);
    end
    run(mk(OP_LIN, NP*NS, 1, W'(1)), mk(OP_LIN, NP*NS, 1, W'(1)), o0, o1, c0);
    for (int pix = 0; pix < NP; pix++) for (int s = 0; s < NS; s++) for (int l = 0; l < L; l++) begin
      V0[pix][s*L+l] = o0[pix*NS+s][l]; V1[pix][s*L+l] = o1[pix*NS+s][l];
      check(V0[pix][s*L+l] + V1[pix][s*L+l] == V[pix][s*L+l], "bias output");
    end

    // 7. E2 = V - A2
    for (int p = 0; p < 2; p++) for (int pix = 0; pix < NP; pix++) for (int s = 0; s < NS; s++) begin
      for (int l = 0; l < L; l++) bt[l] = p ? V1[pix][s*L+l] : V0[pix][s*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? A2[pix][s*L+l] - A20[pix][s*L+l] : A20[pix][s*L+l];
      ldq[p].push_back(bt);
    end
    run(mk(OP_MASK, NP*NS), mk(OP_MASK, NP*NS), o0, o1, c0);
    for (int pix = 0; pix < NP; pix++) for (int s = 0; s < NS; s++) for (int l = 0; l < L; l++)
      E2[pix][s*L+l] = o0[pix*NS+s][l];

    // 8. X2ACT
    for (int p = 0; p < 2; p++) for (int pix = 0; pix < NP; pix++) for (int s = 0; s < NS; s++) begin
      for (int l = 0; l < L; l++) bt[l] = E2[pix][s*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? A2[pix][s*L+l] - A20[pix][s*L+l] : A20[pix][s*L+l];
      ldq[p].push_back(bt);
      for (int l = 0; l < L; l++)
        bt[l] = p ? mul(A2[pix][s*L+l], A2[pix][s*L+l]) - Z20[pix][s*L+l] : Z20[pix][s*L+l];
      ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? V1[pix][s*L+l] : V0[pix][s*L+l]; ldq[p].push_back(bt);
    end
    run(mk(OP_X2ACT, NP*NS, 1, '0, k1, w2, bb), mk(OP_X2ACT, NP*NS, 1, '0, k1, w2, bb), o0, o1, c0);
    for (int pix = 0; pix < NP; pix++) for (int s = 0; s < NS; s++) for (int l = 0; l < L; l++) begin
      H0[pix][s*L+l] = o0[pix*NS+s][l]; H1[pix][s*L+l] = o1[pix*NS+s][l];
      Hh[pix][s*L+l] = mul(k1, mul(V[pix][s*L+l], V[pix][s*L+l])) + mul(w2, V[pix][s*L+l]) + bb;
    end

    // 9. open the activations
    for (int p = 0; p < 2; p++) for (int pix = 0; pix < NP; pix++) for (int s = 0; s < NS; s++) begin
      for (int l = 0; l < L; l++) bt[l] = p ? H1[pix][s*L+l] : H0[pix][s*L+l]; ldq[p].push_back(bt);
    end
    run(mk(OP_REC, NP*NS), mk(OP_REC, NP*NS), o0, o1, c0);
    for (int pix = 0; pix < NP; pix++) for (int s = 0; s < NS; s++) for (int l = 0; l < L; l++)
      check(o0[pix*NS+s][l] == Hh[pix][s*L+l] && o1[pix*NS+s][l] == Hh[pix][s*L+l],
            "activation output");
    $display("conv1 block done at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
