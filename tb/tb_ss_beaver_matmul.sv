// tb_ss_beaver_matmul: Beaver vector x matrix product on both servers.
// Part 1 reproduces the 4-bit worked example (u = [-2, 1] times
// w = [[0, 1], [2, -1]]): server 0 must produce [-4, -4], server 1 [6, 1],
// which recover to [2, -3]. Part 2 draws random 1xK vectors X and KxL
// matrices Y and triples (A, B, Z = A*B) over Z_2^32, shares them, opens E
// and F, streams the K steps into one unit per server and checks that
// R_S0 + R_S1 == X*Y, which is computed here directly. It also checks that
// out_valid comes exactly one cycle after the last step.
module tb_ss_beaver_matmul;
  import rr_pkg::*;
  localparam int W = 32, L = 4, KMAX = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- 32-bit, 4-lane pair
  logic                sv, sf, sl, v0, v1;
  logic [W-1:0]        x0, x1, e;
  logic [L-1:0][W-1:0] f, y0, y1, z0, z1, r0, r1;

  ss_beaver_matmul #(.W(W), .L(L)) p0 (.clk, .rst_n, .party(1'b0), .step_valid(sv),
    .step_first(sf), .step_last(sl), .x_s(x0), .e, .f, .y_s(y0), .z_s(z0), .out_valid(v0), .r(r0));
  ss_beaver_matmul #(.W(W), .L(L)) p1 (.clk, .rst_n, .party(1'b1), .step_valid(sv),
    .step_first(sf), .step_last(sl), .x_s(x1), .e, .f, .y_s(y1), .z_s(z1), .out_valid(v1), .r(r1));

  // ---- 4-bit, 2-lane pair for the worked example
  logic            sv4, sf4, sl4, u0v, u1v;
  logic [3:0]      x40, x41, e4;
  logic [1:0][3:0] f4, y40, y41, z40, z41, q0, q1;

  ss_beaver_matmul #(.W(4), .L(2)) q0u (.clk, .rst_n, .party(1'b0), .step_valid(sv4),
    .step_first(sf4), .step_last(sl4), .x_s(x40), .e(e4), .f(f4), .y_s(y40), .z_s(z40),
    .out_valid(u0v), .r(q0));
  ss_beaver_matmul #(.W(4), .L(2)) q1u (.clk, .rst_n, .party(1'b1), .step_valid(sv4),
    .step_first(sf4), .step_last(sl4), .x_s(x41), .e(e4), .f(f4), .y_s(y41), .z_s(z41),
    .out_valid(u1v), .r(q1));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // figure operands (4-bit two's complement), row k of each matrix
    logic [3:0] U0[2], U1[2], EE[2], FF[2][2], W0[2][2], W1[2][2], Z0[2], Z1[2];
    U0 = '{-4'sd4, -4'sd4};  U1 = '{4'd2, 4'd5};
    EE = '{4'd7, -4'sd1};
    FF = '{'{4'd4, -4'sd2}, '{-4'sd5, 4'd1}};
    W0 = '{'{-4'sd3, -4'sd5}, '{-4'sd5, 4'd1}};
    W1 = '{'{4'd3, 4'd6}, '{4'd7, -4'sd2}};
    Z0 = '{-4'sd8, -4'sd4};  Z1 = '{-4'sd6, 4'd5};

    sv = 0; sf = 0; sl = 0; x0 = '0; x1 = '0; e = '0; f = '0; y0 = '0; y1 = '0; z0 = '0; z1 = '0;
    sv4 = 0; sf4 = 0; sl4 = 0; x40 = '0; x41 = '0; e4 = '0; f4 = '0;
    y40 = '0; y41 = '0; z40 = '0; z41 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ---- part 1: worked example
    for (int k = 0; k < 2; k++) begin
      sv4 <= 1; sf4 <= (k == 0); sl4 <= (k == 1);
      x40 <= U0[k]; x41 <= U1[k]; e4 <= EE[k];
      for (int n = 0; n < 2; n++) begin
        f4[n] <= FF[k][n]; y40[n] <= W0[k][n]; y41[n] <= W1[k][n];
        z40[n] <= Z0[n]; z41[n] <= Z1[n];
      end
      @(posedge clk);
    end
    sv4 <= 0;
    #1;
    check(u0v && u1v, "example out_valid one cycle after last step");
    check(q0[0] == -4'sd4 && q0[1] == -4'sd4, "example r0 == [-4, -4]");
    check(q1[0] == 4'd6 && q1[1] == 4'd1, "example r1 == [6, 1]");
    check(4'(q0[0] + q1[0]) == 4'd2 && 4'(q0[1] + q1[1]) == -4'sd3, "example rec == [2, -3]");
    @(posedge clk);

    // ---- part 2: random
    for (int t = 0; t < 60; t++) begin
      int K;
      logic [W-1:0] X[KMAX], A[KMAX], Y[KMAX][L], B[KMAX][L], Z[L], R[L], RX[KMAX], RY[KMAX][L], RZ[L];
      K = 1 + ($urandom % KMAX);
      for (int k = 0; k < K; k++) begin
        X[k] = $urandom; A[k] = $urandom; RX[k] = $urandom;
        for (int n = 0; n < L; n++) begin Y[k][n] = $urandom; B[k][n] = $urandom; RY[k][n] = $urandom; end
      end
      for (int n = 0; n < L; n++) begin
        Z[n] = '0; R[n] = '0; RZ[n] = $urandom;
        for (int k = 0; k < K; k++) begin
          Z[n] = Z[n] + W'(longint'(A[k]) * longint'(B[k][n]));
          R[n] = R[n] + W'(longint'(X[k]) * longint'(Y[k][n]));
        end
      end
      // shares: X_S0 = RX, X_S1 = X - RX, A split with the same masks as X
      for (int k = 0; k < K; k++) begin
        sv <= 1; sf <= (k == 0); sl <= (k == K - 1);
        x0 <= RX[k]; x1 <= X[k] - RX[k];
        e  <= X[k] - A[k];
        for (int n = 0; n < L; n++) begin
          f[n]  <= Y[k][n] - B[k][n];
          y0[n] <= RY[k][n]; y1[n] <= Y[k][n] - RY[k][n];
          z0[n] <= RZ[n];    z1[n] <= Z[n] - RZ[n];
        end
        @(posedge clk);
        // random bubble between steps
        if (k < K - 1 && $urandom % 4 == 0) begin sv <= 0; @(posedge clk); end
      end
      sv <= 0;
      #1 check(v0 && v1, "out_valid one cycle after last step");
      for (int n = 0; n < L; n++) check(W'(r0[n] + r1[n]) == R[n], "rec == X*Y");
      @(posedge clk);
      #1 check(!v0, "out_valid single cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
