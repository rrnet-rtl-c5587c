// tb_ss_share_rec: shares random secrets as (r, x - r), feeds them to
// ss_share_rec and checks the recovered value equals the secret, plus the
// one-cycle latency. Includes the 4-bit example: E shares [-4-3, -4-4] and
// [2-4, 5+2] recover to E = [7, -1].
module tb_ss_share_rec;
  import rr_pkg::*;
  localparam int W = 32, L = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                in_valid = 0, out_valid;
  logic [L-1:0][W-1:0] s0, s1, x;
  int checks = 0, failures = 0;

  ss_share_rec #(.W(W), .L(L)) dut (.*);

  logic            v4_in = 0, v4_out;
  logic [1:0][3:0] a4, b4, x4;
  ss_share_rec #(.W(4), .L(2)) dut4 (.clk, .rst_n, .in_valid(v4_in), .s0(a4), .s1(b4),
                                     .out_valid(v4_out), .x(x4));

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
    s0 = '0; s1 = '0; a4 = '0; b4 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(!out_valid, "out_valid low after reset");
    for (int t = 0; t < 200; t++) begin
      logic [L-1:0][W-1:0] xs, rs;
      for (int l = 0; l < L; l++) begin xs[l] = $urandom; rs[l] = $urandom; end
      for (int l = 0; l < L; l++) begin s0[l] <= rs[l]; s1[l] <= xs[l] - rs[l]; end
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      #1 check(out_valid, "latency 1");
      for (int l = 0; l < L; l++) check(x[l] == xs[l], "rec == secret");
    end
    // E_S0 = u0 - A0 = [-7, -8], E_S1 = u1 - A1 = [-2, 7] -> E = [7, -1]
    a4 <= {4'(-8), 4'(-7)}; b4 <= {4'(7), 4'(-2)}; v4_in <= 1;
    @(posedge clk); v4_in <= 0;
    #1 check(v4_out && x4[0] == 4'd7 && x4[1] == 4'(-1), "figure example E = [7, -1]");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
