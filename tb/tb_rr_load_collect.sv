// tb_rr_load_collect: arms the collector with 1..4 beats, feeds numbered
// beats with random gaps in ld_valid, and checks that beat j lands in slot
// j, that ld_ready drops after the last beat, that done pulses exactly one
// cycle after the last accepted beat, and that with ld_valid held high n
// beats take n cycles.
module tb_rr_load_collect;
  import rr_pkg::*;
  localparam int W = 32, L = 4, S = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                       start = 0, ld_valid = 0, ld_ready, done;
  logic [2:0]                 nbeats;
  logic [L-1:0][W-1:0]        ld_data;
  logic [S-1:0][L-1:0][W-1:0] slot;
  int checks = 0, failures = 0;

  rr_load_collect #(.W(W), .L(L), .S(S)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nbeats = '0; ld_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(!ld_ready && !done, "idle after reset");
    for (int t = 0; t < 200; t++) begin
      int n, cyc;
      logic [L-1:0][W-1:0] want[S];
      bit gaps;
      n = 1 + ($urandom % S);
      gaps = (t % 2 == 1);
      start <= 1; nbeats <= 3'(n);
      @(posedge clk);
      start <= 0;
      cyc = 0;
      for (int j = 0; j < n; j++) begin
        for (int l = 0; l < L; l++) want[j][l] = $urandom;
        while (gaps && ($urandom % 3 == 0)) begin
          ld_valid <= 0; @(posedge clk); cyc++;
        end
        ld_valid <= 1; ld_data <= want[j];
        #1 check(ld_ready, "ready while collecting");
        @(posedge clk); cyc++;
      end
      ld_valid <= 0;
      #1 check(done, "done one cycle after last beat");
      check(!ld_ready, "ready drops after last beat");
      if (!gaps) check(cyc == n, "n beats in n cycles");
      for (int j = 0; j < n; j++) check(slot[j] == want[j], "beat j in slot j");
      @(posedge clk);
      #1 check(!done, "done single cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
