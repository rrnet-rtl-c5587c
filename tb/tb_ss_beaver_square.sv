// tb_ss_beaver_square: end-to-end check of the Beaver square on both
// servers. The testbench plays the dealer and the link: it draws X and A,
// sets Z = A*A, shares X, A and Z, opens E = X - A, and runs one
// ss_beaver_square per server (party 0 and party 1). The two outputs must
// recover to X*X mod 2^32. Also checks the one-cycle latency.
module tb_ss_beaver_square;
  import rr_pkg::*;
  localparam int W = 32, L = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                in_valid = 0, v0, v1;
  logic [L-1:0][W-1:0] e, a0, a1, z0, z1, r0, r1;
  int checks = 0, failures = 0;

  ss_beaver_square #(.W(W), .L(L)) p0 (.clk, .rst_n, .in_valid, .party(1'b0), .e,
                                       .a_sh(a0), .z_sh(z0), .out_valid(v0), .r(r0));
  ss_beaver_square #(.W(W), .L(L)) p1 (.clk, .rst_n, .in_valid, .party(1'b1), .e,
                                       .a_sh(a1), .z_sh(z1), .out_valid(v1), .r(r1));

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
    e = '0; a0 = '0; a1 = '0; z0 = '0; z1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [W-1:0] xs[L], as[L], zs[L], ra[L], rz[L];
      for (int l = 0; l < L; l++) begin
        xs[l] = (t < 3) ? W'(t + l) : $urandom;
        as[l] = $urandom;
        zs[l] = W'(longint'(as[l]) * longint'(as[l]));
        ra[l] = $urandom; rz[l] = $urandom;
        a0[l] <= ra[l]; a1[l] <= as[l] - ra[l];
        z0[l] <= rz[l]; z1[l] <= zs[l] - rz[l];
        e[l]  <= xs[l] - as[l];
      end
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      #1 check(v0 && v1, "latency 1");
      for (int l = 0; l < L; l++)
        check(W'(r0[l] + r1[l]) == W'(longint'(xs[l]) * longint'(xs[l])), "rec == X*X");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
