// tb_ss_share_gen: drives random secrets x and masks r into ss_share_gen and
// checks (1) own == r, (2) own + peer == x mod 2^32 (the two shares recover
// the secret), (3) peer computed independently as x - r, and (4) the
// one-cycle latency. Includes the 4-bit example of the sharing figure
// (u = [-2, 1] shared as u0 = [-4, -4], u1 = [2, 5]).
module tb_ss_share_gen;
  import rr_pkg::*;
  localparam int W = 32, L = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                in_valid = 0, out_valid;
  logic [L-1:0][W-1:0] x, r, own, peer;
  int checks = 0, failures = 0;

  ss_share_gen #(.W(W), .L(L)) dut (.*);

  // 4-bit instance for the worked example
  logic                v4_in = 0, v4_out;
  logic [1:0][3:0]     x4, r4, own4, peer4;
  ss_share_gen #(.W(4), .L(2)) dut4 (.clk, .rst_n, .in_valid(v4_in), .x(x4), .r(r4),
                                     .out_valid(v4_out), .own(own4), .peer(peer4));

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
    x = '0; r = '0; x4 = '0; r4 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(!out_valid, "out_valid low after reset");
    for (int t = 0; t < 200; t++) begin
      logic [L-1:0][W-1:0] xs, rs;
      for (int l = 0; l < L; l++) begin xs[l] = $urandom; rs[l] = $urandom; end
      x <= xs; r <= rs; in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      #1 check(out_valid, "latency 1");
      for (int l = 0; l < L; l++) begin
        check(own[l] == rs[l], "own == r");
        check(W'(own[l] + peer[l]) == xs[l], "rec(shares) == x");
        check(peer[l] == W'(xs[l] - rs[l]), "peer == x - r");
      end
      @(posedge clk);
      #1 check(!out_valid, "single-cycle valid");
    end
    // worked example: u = [-2, 1], r = u0 = [-4, -4] -> u1 = [2, 5]
    x4 <= {4'(1), 4'(-2)}; r4 <= {4'(-4), 4'(-4)}; v4_in <= 1;
    @(posedge clk); v4_in <= 0;
    #1 check(v4_out && peer4[0] == 4'd2 && peer4[1] == 4'd5, "figure example u1 = [2, 5]");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
