// tb_rrnet_2pc_core: end-to-end test of two rrnet_2pc_core instances, one
// per server, at the default sizes (32-bit ring, four lanes), joined by two
// behavioural link models. The testbench plays the hosts that fill the load
// buses and drain the store buses, and the dealer that hands out Beaver
// triples and pairs. It runs one small private layer,
//     h = X2act( a * (x . Y) + beta ),  x: 1 x K, Y: K x N,
// as the command sequence
//     SHR/RCV x (server 0 owns x), SHR/RCV Y (server 1 owns Y),
//     MASK E = x - A, MASK F = Y - B, MATMUL, LIN, MASK E2 = v - A2,
//     SQ (v^2 on its own), X2ACT, REC h,
// and checks every intermediate result against a plaintext model of the
// same layer computed here. The layer runs twice: with random stalls on all
// streams, then stall-free, where the cycle count of the LIN, X2ACT and
// MATMUL commands is checked against the timing in the core's header.
// A final burst of 16 LIN vectors runs while the store buses are held off,
// so that gathers have to wait for free store FIFO entries. Each
// operation and each stall mechanism (load underrun, store backpressure,
// link backpressure, waiting for the peer) is counted; one that never
// happened counts as a failure, and so does a gather that never had to wait
// for a free store FIFO entry.
module tb_rrnet_2pc_core;
  import rr_pkg::*;
  localparam int W = RING_W, L = LANES;
  localparam int K = 8, N = 8, NB = N / L, KV = K / L;
  typedef logic [L-1:0][W-1:0] beat_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- two cores and the link
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
    // link from server p to server 1-p
    tb_link_model #(.W(W), .L(L), .LATENCY(6 + 3 * p)) u_link (
      .clk, .rst_n,
      .in_valid(tx_valid[p]), .in_ready(tx_ready[p]), .in_data(tx_data[p]),
      .out_valid(rx_valid[1-p]), .out_ready(rx_ready[1-p]), .out_data(rx_data[1-p])
    );
  end

  // ---------------- hosts: load driver, store sink, command handshake
  bit    stalls = 1'b1;
  bit    st_hold = 1'b0;   // holds both store buses off
  beat_t ldq[2][$], stq[2][$];
  bit    done_seen[2];
  longint cyc = 0, acc_cyc[2], done_cyc[2];
  int    n_ld_stall = 0, n_st_bp = 0, n_tx_bp = 0, n_rx_wait = 0, n_credit = 0;
  int    n_op[8];

  always @(posedge clk) cyc <= cyc + 1;

  for (genvar p = 0; p < 2; p++) begin : g_host
    always @(posedge clk) begin
      if (!rst_n) begin
        ld_valid[p] <= 1'b0; st_ready[p] <= 1'b0; cmd_valid[p] <= 1'b0;
      end else begin
        // load bus
        if (!ld_valid[p] || ld_ready[p]) begin
          if (ldq[p].size() > 0 && (!stalls || $urandom % 4 != 0)) begin
            ld_valid[p] <= 1'b1;
            ld_data[p]  <= ldq[p].pop_front();
          end else begin
            ld_valid[p] <= 1'b0;
          end
        end
        // store bus
        if (st_valid[p] && st_ready[p]) stq[p].push_back(st_data[p]);
        st_ready[p] <= !st_hold && (!stalls || ($urandom % 3 != 0));
        // commands
        if (cmd_valid[p] && cmd_ready[p]) begin
          cmd_valid[p] <= 1'b0;
          acc_cyc[p]   <= cyc;
          n_op[int'(cmd[p].op)]++;
        end
        if (done[p]) begin done_seen[p] <= 1'b1; done_cyc[p] <= cyc; end
        // mechanism counters
        if (ld_ready[p] && !ld_valid[p]) n_ld_stall++;
        if (st_valid[p] && !st_ready[p]) n_st_bp++;
        if (tx_valid[p] && !tx_ready[p]) n_tx_bp++;
        if (rx_ready[p] && !rx_valid[p]) n_rx_wait++;
        // a gather held back because the store FIFO has no free entry
        if (g_srv[p].u_core.state == g_srv[p].u_core.S_STREAM && g_srv[p].u_core.g_more &&
            !g_srv[p].u_core.col_busy && !g_srv[p].u_core.credit_ok) n_credit++;
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

  // issue c0 to server 0 and c1 to server 1, wait for both, return the
  // stored vectors and the cycles from command acceptance to done
  task automatic run(input cmd_t c0, input cmd_t c1, output beat_t out0[$],
                     output beat_t out1[$], output longint cyc0, output longint cyc1);
    @(posedge clk);
    done_seen[0] <= 0; done_seen[1] <= 0;
    cmd[0] <= c0; cmd[1] <= c1;
    cmd_valid[0] <= 1; cmd_valid[1] <= 1;
    @(posedge clk);
    wait (done_seen[0] && done_seen[1]);
    @(posedge clk);
    cyc0 = done_cyc[0] - acc_cyc[0];
    cyc1 = done_cyc[1] - acc_cyc[1];
    out0 = stq[0]; out1 = stq[1];
    stq[0].delete(); stq[1].delete();
    check(out0.size() == int'(c0.count) && out1.size() == int'(c1.count), "one store per output vector");
    check(ldq[0].size() == 0 && ldq[1].size() == 0, "all loads consumed");
  endtask

  function automatic logic [W-1:0] mul(logic [W-1:0] a, logic [W-1:0] b);
    return W'(longint'(a) * longint'(b));
  endfunction

  // ---------------- one private layer
  task automatic layer(input bit check_timing);
    logic [W-1:0] x[K], r[K], Y[K][N], ry[K][N];
    logic [W-1:0] A[K], B[K][N], Z[N], A_s0[K], B_s0[K][N], Z_s0[N];
    logic [W-1:0] X0[K], X1[K], Y0[K][N], Y1[K][N], E[K], F[K][N];
    logic [W-1:0] R0[N], R1[N], R[N], a_bn, beta[N], beta_s0[N], V0[N], V1[N], V[N];
    logic [W-1:0] A2[N], Z2[N], A2_s0[N], Z2_s0[N], E2[N], k1, w2, bb, H[N];
    beat_t o0[$], o1[$], bt;
    longint c0, c1;

    for (int k = 0; k < K; k++) begin
      x[k] = $urandom; r[k] = $urandom; A[k] = $urandom; A_s0[k] = $urandom;
      for (int n = 0; n < N; n++) begin
        Y[k][n] = $urandom; ry[k][n] = $urandom; B[k][n] = $urandom; B_s0[k][n] = $urandom;
      end
    end
    for (int n = 0; n < N; n++) begin
      Z[n] = '0; R[n] = '0;
      for (int k = 0; k < K; k++) begin
        Z[n] = Z[n] + mul(A[k], B[k][n]);
        R[n] = R[n] + mul(x[k], Y[k][n]);
      end
      Z_s0[n] = $urandom; beta[n] = $urandom; beta_s0[n] = $urandom;
      A2[n] = $urandom; Z2[n] = mul(A2[n], A2[n]); A2_s0[n] = $urandom; Z2_s0[n] = $urandom;
    end
    a_bn = $urandom; k1 = $urandom; w2 = $urandom; bb = $urandom;

    // 1. server 0 shares x
    for (int v = 0; v < KV; v++) begin
      for (int l = 0; l < L; l++) bt[l] = x[v*L+l]; ldq[0].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = r[v*L+l]; ldq[0].push_back(bt);
    end
    run(mk(OP_SHR, KV), mk(OP_RCV, KV), o0, o1, c0, c1);
    for (int v = 0; v < KV; v++) for (int l = 0; l < L; l++) begin
      X0[v*L+l] = o0[v][l]; X1[v*L+l] = o1[v][l];
      check(X0[v*L+l] == r[v*L+l], "SHR keeps r");
      check(X0[v*L+l] + X1[v*L+l] == x[v*L+l], "SHR/RCV shares recover x");
    end

    // 2. server 1 shares Y, row segments ordered (nb, k)
    for (int nb = 0; nb < NB; nb++) for (int k = 0; k < K; k++) begin
      for (int l = 0; l < L; l++) bt[l] = Y[k][nb*L+l];  ldq[1].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = ry[k][nb*L+l]; ldq[1].push_back(bt);
    end
    run(mk(OP_RCV, NB*K), mk(OP_SHR, NB*K), o0, o1, c0, c1);
    for (int nb = 0; nb < NB; nb++) for (int k = 0; k < K; k++) for (int l = 0; l < L; l++) begin
      Y0[k][nb*L+l] = o0[nb*K+k][l]; Y1[k][nb*L+l] = o1[nb*K+k][l];
      check(Y0[k][nb*L+l] + Y1[k][nb*L+l] == Y[k][nb*L+l], "Y shares recover Y");
    end

    // 3. open E = x - A
    for (int p = 0; p < 2; p++) for (int v = 0; v < KV; v++) begin
      for (int l = 0; l < L; l++) bt[l] = p ? X1[v*L+l] : X0[v*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? A[v*L+l] - A_s0[v*L+l] : A_s0[v*L+l]; ldq[p].push_back(bt);
    end
    run(mk(OP_MASK, KV), mk(OP_MASK, KV), o0, o1, c0, c1);
    for (int v = 0; v < KV; v++) for (int l = 0; l < L; l++) begin
      E[v*L+l] = o0[v][l];
      check(o0[v][l] == x[v*L+l] - A[v*L+l] && o1[v][l] == o0[v][l], "MASK opens E = x - A");
    end

    // 4. open F = Y - B
    for (int p = 0; p < 2; p++) for (int nb = 0; nb < NB; nb++) for (int k = 0; k < K; k++) begin
      for (int l = 0; l < L; l++) bt[l] = p ? Y1[k][nb*L+l] : Y0[k][nb*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? B[k][nb*L+l] - B_s0[k][nb*L+l] : B_s0[k][nb*L+l];
      ldq[p].push_back(bt);
    end
    run(mk(OP_MASK, NB*K), mk(OP_MASK, NB*K), o0, o1, c0, c1);
    for (int nb = 0; nb < NB; nb++) for (int k = 0; k < K; k++) for (int l = 0; l < L; l++) begin
      F[k][nb*L+l] = o0[nb*K+k][l];
      check(o0[nb*K+k][l] == Y[k][nb*L+l] - B[k][nb*L+l] && o1[nb*K+k][l] == o0[nb*K+k][l],
            "MASK opens F = Y - B");
    end

    // 5. MATMUL, one output vector per column segment
    for (int p = 0; p < 2; p++) for (int nb = 0; nb < NB; nb++) for (int k = 0; k < K; k++) begin
      bt = '0; bt[0] = p ? X1[k] : X0[k]; bt[1] = E[k]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = F[k][nb*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? Y1[k][nb*L+l] : Y0[k][nb*L+l]; ldq[p].push_back(bt);
      if (k == 0) begin
        for (int l = 0; l < L; l++) bt[l] = p ? Z[nb*L+l] - Z_s0[nb*L+l] : Z_s0[nb*L+l];
        ldq[p].push_back(bt);
      end
    end
    run(mk(OP_MATMUL, NB, K), mk(OP_MATMUL, NB, K), o0, o1, c0, c1);
    for (int nb = 0; nb < NB; nb++) for (int l = 0; l < L; l++) begin
      R0[nb*L+l] = o0[nb][l]; R1[nb*L+l] = o1[nb][l];
      check(R0[nb*L+l] + R1[nb*L+l] == R[nb*L+l], "MATMUL shares recover x.Y");
    end
    if (check_timing) begin
      check(c0 == longint'(NB * (4*K + 1) + 5) && c1 == c0, "MATMUL cycles = count*(4K+1)+5");
      $display("MATMUL K=%0d count=%0d: %0d cycles", K, NB, c0);
    end

    // 6. LIN (batch-norm style): V = a*R + beta
    for (int p = 0; p < 2; p++) for (int nb = 0; nb < NB; nb++) begin
      for (int l = 0; l < L; l++) bt[l] = p ? R1[nb*L+l] : R0[nb*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? beta[nb*L+l] - beta_s0[nb*L+l] : beta_s0[nb*L+l];
      ldq[p].push_back(bt);
    end
    run(mk(OP_LIN, NB, 1, a_bn), mk(OP_LIN, NB, 1, a_bn), o0, o1, c0, c1);
    for (int nb = 0; nb < NB; nb++) for (int l = 0; l < L; l++) begin
      V0[nb*L+l] = o0[nb][l]; V1[nb*L+l] = o1[nb][l];
      V[nb*L+l] = mul(a_bn, R[nb*L+l]) + beta[nb*L+l];
      check(V0[nb*L+l] + V1[nb*L+l] == V[nb*L+l], "LIN shares recover a*R + beta");
    end
    if (check_timing) begin
      check(c0 == longint'(NB * 3 + 5) && c1 == c0, "LIN cycles = count*3+5");
      $display("LIN count=%0d: %0d cycles", NB, c0);
    end

    // 7. open E2 = V - A2
    for (int p = 0; p < 2; p++) for (int nb = 0; nb < NB; nb++) begin
      for (int l = 0; l < L; l++) bt[l] = p ? V1[nb*L+l] : V0[nb*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? A2[nb*L+l] - A2_s0[nb*L+l] : A2_s0[nb*L+l];
      ldq[p].push_back(bt);
    end
    run(mk(OP_MASK, NB), mk(OP_MASK, NB), o0, o1, c0, c1);
    for (int nb = 0; nb < NB; nb++) for (int l = 0; l < L; l++) begin
      E2[nb*L+l] = o0[nb][l];
      check(o0[nb][l] == V[nb*L+l] - A2[nb*L+l], "MASK opens E2");
    end

    // 8. SQ on its own: V^2
    for (int p = 0; p < 2; p++) for (int nb = 0; nb < NB; nb++) begin
      for (int l = 0; l < L; l++) bt[l] = E2[nb*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? A2[nb*L+l] - A2_s0[nb*L+l] : A2_s0[nb*L+l];
      ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? Z2[nb*L+l] - Z2_s0[nb*L+l] : Z2_s0[nb*L+l];
      ldq[p].push_back(bt);
    end
    run(mk(OP_SQ, NB), mk(OP_SQ, NB), o0, o1, c0, c1);
    for (int nb = 0; nb < NB; nb++) for (int l = 0; l < L; l++)
      check(o0[nb][l] + o1[nb][l] == mul(V[nb*L+l], V[nb*L+l]), "SQ shares recover V^2");

    // 9. X2ACT
    for (int p = 0; p < 2; p++) for (int nb = 0; nb < NB; nb++) begin
      for (int l = 0; l < L; l++) bt[l] = E2[nb*L+l]; ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? A2[nb*L+l] - A2_s0[nb*L+l] : A2_s0[nb*L+l];
      ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? Z2[nb*L+l] - Z2_s0[nb*L+l] : Z2_s0[nb*L+l];
      ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = p ? V1[nb*L+l] : V0[nb*L+l]; ldq[p].push_back(bt);
    end
    run(mk(OP_X2ACT, NB, 1, '0, k1, w2, bb), mk(OP_X2ACT, NB, 1, '0, k1, w2, bb), o0, o1, c0, c1);
    if (check_timing) begin
      check(c0 == longint'(NB * 5 + 6) && c1 == c0, "X2ACT cycles = count*5+6");
      $display("X2ACT count=%0d: %0d cycles", NB, c0);
    end
    for (int nb = 0; nb < NB; nb++) for (int l = 0; l < L; l++) begin
      H[nb*L+l] = mul(k1, mul(V[nb*L+l], V[nb*L+l])) + mul(w2, V[nb*L+l]) + bb;
      check(o0[nb][l] + o1[nb][l] == H[nb*L+l], "X2ACT shares recover k1*V^2 + w2*V + b");
      V0[nb*L+l] = o0[nb][l]; V1[nb*L+l] = o1[nb][l];
    end

    // 10. REC: both servers open h
    for (int p = 0; p < 2; p++) for (int nb = 0; nb < NB; nb++) begin
      for (int l = 0; l < L; l++) bt[l] = p ? V1[nb*L+l] : V0[nb*L+l]; ldq[p].push_back(bt);
    end
    run(mk(OP_REC, NB), mk(OP_REC, NB), o0, o1, c0, c1);
    for (int nb = 0; nb < NB; nb++) for (int l = 0; l < L; l++)
      check(o0[nb][l] == H[nb*L+l] && o1[nb][l] == H[nb*L+l], "REC opens h on both servers");
  endtask

  // a burst of LIN vectors while the store buses are held off for a while:
  // the gathers must wait for free store FIFO entries, and no result may be
  // lost or reordered
  task automatic lin_burst();
    localparam int C = 16;
    logic [W-1:0] xs[C][L], ys[C][L], a;
    beat_t o0[$], o1[$], bt;
    longint c0, c1;
    a = $urandom;
    for (int p = 0; p < 2; p++) for (int v = 0; v < C; v++) begin
      for (int l = 0; l < L; l++) begin
        if (p == 0) begin xs[v][l] = $urandom; ys[v][l] = $urandom; end
        bt[l] = xs[v][l] + W'(p);
      end
      ldq[p].push_back(bt);
      for (int l = 0; l < L; l++) bt[l] = ys[v][l]; ldq[p].push_back(bt);
    end
    st_hold = 1'b1;
    fork
      begin repeat (40) @(posedge clk); st_hold = 1'b0; end
      run(mk(OP_LIN, C, 1, a), mk(OP_LIN, C, 1, a), o0, o1, c0, c1);
    join
    for (int v = 0; v < C; v++) for (int l = 0; l < L; l++) begin
      check(o0[v][l] == mul(a, xs[v][l]) + ys[v][l], "LIN burst, server 0, in order");
      check(o1[v][l] == mul(a, xs[v][l] + W'(1)) + ys[v][l], "LIN burst, server 1, in order");
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) n_op[i] = 0;
    for (int p = 0; p < 2; p++) begin
      cmd[p] = '0; ld_data[p] = '0; done_seen[p] = 0; acc_cyc[p] = 0; done_cyc[p] = 0;
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    stalls = 1'b1;
    layer(1'b0);
    stalls = 1'b0;
    layer(1'b1);
    stalls = 1'b1;
    lin_burst();

    $display("ops: SHR %0d REC %0d MASK %0d LIN %0d SQ %0d X2ACT %0d MATMUL %0d RCV %0d",
             n_op[OP_SHR], n_op[OP_REC], n_op[OP_MASK], n_op[OP_LIN], n_op[OP_SQ],
             n_op[OP_X2ACT], n_op[OP_MATMUL], n_op[OP_RCV]);
    $display("stalls: load %0d store %0d link-tx %0d peer-wait %0d store-credit %0d",
             n_ld_stall, n_st_bp, n_tx_bp, n_rx_wait, n_credit);
    for (int i = 0; i < 8; i++) check(n_op[i] > 0, "every operation ran");
    check(n_ld_stall > 0, "load underrun happened");
    check(n_st_bp > 0, "store backpressure happened");
    check(n_tx_bp > 0, "link backpressure happened");
    check(n_rx_wait > 0, "wait for peer happened");
    check(n_credit > 0, "gather held for a store FIFO entry happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
