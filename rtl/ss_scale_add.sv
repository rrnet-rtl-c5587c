// ss_scale_add: scaling and addition on shares, <aX + Y> = (a X_S0 + Y_S0,
// a X_S1 + Y_S1). Each server applies it to its own shares with the same
// public scalar a; no communication is needed. LANES lanes over Z_(2^W).
// Batch normalisation (per-channel a and Y = bias share) and the scale step
// of average pooling map onto it. Following the paper: the formula. Own
// choices: one register stage, latency exactly one cycle, no fixed-point
// truncation (the scalar is a ring element; the paper does not say how
// fixed-point products are rescaled).
module ss_scale_add
  import rr_pkg::*;
#(
  parameter int W = RING_W,
  parameter int L = LANES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [W-1:0]        a,        // public scalar
  input  logic [L-1:0][W-1:0] x,        // share X_Si
  input  logic [L-1:0][W-1:0] y,        // share Y_Si
  output logic                out_valid,
  output logic [L-1:0][W-1:0] r         // a*X_Si + Y_Si mod 2^W
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int l = 0; l < L; l++) r[l] <= W'(a * x[l]) + y[l];
  end

endmodule
