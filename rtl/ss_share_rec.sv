// ss_share_rec: share recovery, rec(<x>) = x_S0 + x_S1 mod 2^W, on LANES
// lanes. The core uses it to open a value from its own share and the share
// received from the other party (the opened Beaver masks E and F, or a
// final result). Following the paper: the recovery formula. Own choices: one
// register stage, latency exactly one cycle, reset clears only out_valid.
module ss_share_rec
  import rr_pkg::*;
#(
  parameter int W = RING_W,
  parameter int L = LANES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [L-1:0][W-1:0] s0,       // share of server 0 (or own)
  input  logic [L-1:0][W-1:0] s1,       // share of server 1 (or peer)
  output logic                out_valid,
  output logic [L-1:0][W-1:0] x         // s0 + s1 mod 2^W
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int l = 0; l < L; l++) x[l] <= s0[l] + s1[l];
  end

endmodule
