// ss_share_gen: additive share generation, shr(x) = (r, x - r), on LANES
// lanes of the ring Z_(2^W). The random value r comes in on a port (the
// caller owns the randomness source); the core keeps r as its own share and
// x - r goes to the other party. The same subtraction also forms the Beaver
// masks E_Si = X_Si - A_Si and F_Si = Y_Si - B_Si, so the core reuses this
// unit for them. Following the paper: the share formula. Own choices: one
// register stage, in_valid -> out_valid latency of exactly one cycle, reset
// clears only out_valid.
module ss_share_gen
  import rr_pkg::*;
#(
  parameter int W = RING_W,
  parameter int L = LANES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [L-1:0][W-1:0] x,        // secret (or own share X_Si)
  input  logic [L-1:0][W-1:0] r,        // random mask (or Beaver share A_Si)
  output logic                out_valid,
  output logic [L-1:0][W-1:0] own,      // r
  output logic [L-1:0][W-1:0] peer      // x - r mod 2^W
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int l = 0; l < L; l++) begin
        own[l]  <= r[l];
        peer[l] <= x[l] - r[l];
      end
    end
  end

endmodule
