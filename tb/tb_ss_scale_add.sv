// tb_ss_scale_add: secret-shares random X and Y, runs ss_scale_add on both
// servers' shares with the same public a, and checks that the outputs
// recover to a*X + Y (computed here in 64-bit and reduced mod 2^32), and the
// one-cycle latency.
module tb_ss_scale_add;
  import rr_pkg::*;
  localparam int W = 32, L = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                in_valid = 0, v0, v1;
  logic [W-1:0]        a;
  logic [L-1:0][W-1:0] x0, y0, x1, y1, r0, r1;
  int checks = 0, failures = 0;

  ss_scale_add #(.W(W), .L(L)) s0 (.clk, .rst_n, .in_valid, .a, .x(x0), .y(y0), .out_valid(v0), .r(r0));
  ss_scale_add #(.W(W), .L(L)) s1 (.clk, .rst_n, .in_valid, .a, .x(x1), .y(y1), .out_valid(v1), .r(r1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; x0 = '0; x1 = '0; y0 = '0; y1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [L-1:0][W-1:0] xs, ys, rx, ry;
      logic [W-1:0] as;
      longint unsigned prod;
      as = (t < 5) ? W'(t) - W'(2) : $urandom;  // includes a = -2, -1, 0, 1, 2
      for (int l = 0; l < L; l++) begin
        xs[l] = $urandom; ys[l] = $urandom; rx[l] = $urandom; ry[l] = $urandom;
      end
      a <= as;
      for (int l = 0; l < L; l++) begin
        x0[l] <= rx[l]; x1[l] <= xs[l] - rx[l];
        y0[l] <= ry[l]; y1[l] <= ys[l] - ry[l];
      end
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      #1 check(v0 && v1, "latency 1");
      for (int l = 0; l < L; l++) begin
        prod = longint'(as) * longint'(xs[l]) + longint'(ys[l]);
        check(W'(r0[l] + r1[l]) == W'(prod), "rec == a*X + Y");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
