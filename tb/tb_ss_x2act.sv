// tb_ss_x2act: the polynomial activation on both servers. For random X,
// Beaver pair (A, Z = A*A) and public k1, w2, b, the testbench shares the
// operands, opens E = X - A and checks that the two outputs recover to
// k1*X^2 + w2*X + b mod 2^32 (computed here directly), two cycles after
// in_valid. Also runs the straight-through initial setting (k1 = 0, w2 = 1,
// b = 0), where the activation must return X itself.
module tb_ss_x2act;
  import rr_pkg::*;
  localparam int W = 32, L = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                in_valid = 0, v0, v1;
  logic [W-1:0]        k1, w2, b;
  logic [L-1:0][W-1:0] e, a0, a1, z0, z1, x0, x1, r0, r1;
  int checks = 0, failures = 0;

  ss_x2act #(.W(W), .L(L)) p0 (.clk, .rst_n, .in_valid, .party(1'b0), .k1, .w2, .b, .e,
                               .a_sh(a0), .z_sh(z0), .x_sh(x0), .out_valid(v0), .r(r0));
  ss_x2act #(.W(W), .L(L)) p1 (.clk, .rst_n, .in_valid, .party(1'b1), .k1, .w2, .b, .e,
                               .a_sh(a1), .z_sh(z1), .x_sh(x1), .out_valid(v1), .r(r1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    k1 = '0; w2 = '0; b = '0; e = '0; a0 = '0; a1 = '0; z0 = '0; z1 = '0; x0 = '0; x1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [W-1:0] xs[L], as[L], zs[L], rx, ra, rz, ks, ws, bs, want;
      ks = (t < 20) ? '0 : $urandom;
      ws = (t < 20) ? W'(1) : $urandom;
      bs = (t < 20) ? '0 : $urandom;
      k1 <= ks; w2 <= ws; b <= bs;
      for (int l = 0; l < L; l++) begin
        xs[l] = $urandom; as[l] = $urandom;
        zs[l] = W'(longint'(as[l]) * longint'(as[l]));
        rx = $urandom; ra = $urandom; rz = $urandom;
        x0[l] <= rx; x1[l] <= xs[l] - rx;
        a0[l] <= ra; a1[l] <= as[l] - ra;
        z0[l] <= rz; z1[l] <= zs[l] - rz;
        e[l]  <= xs[l] - as[l];
      end
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      #1 check(!v0, "not ready after one cycle");
      @(posedge clk);
      #1 check(v0 && v1, "latency 2");
      for (int l = 0; l < L; l++) begin
        want = W'(longint'(ks) * longint'(W'(longint'(xs[l]) * longint'(xs[l]))))
             + W'(longint'(ws) * longint'(xs[l])) + bs;
        check(W'(r0[l] + r1[l]) == want, "rec == k1*X^2 + w2*X + b");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
