// ss_beaver_matmul: local step of the Beaver-triple matrix product
// <R> = <X> (x) <Y> with triple Z = A (x) B. After E = X - A and F = Y - B
// have been opened, server i computes
//     R_Si = -i*E(x)F + X_Si(x)F + E(x)Y_Si + Z_Si.
// The unit is output-stationary: LANES accumulators hold the elements
// R[m, n..n+LANES-1] of one output row segment. One inner-product step k
// brings the scalars X_Si[m,k] and E[m,k] and the row vectors F[k, n..] and
// Y_Si[k, n..]; every lane adds
//     (X_Si[m,k] - i*E[m,k]) * F[k,n] + E[m,k] * Y_Si[k,n]
// (the -i*E(x)F term is folded into the X_Si factor, which needs two
// multipliers per lane instead of three). The first step loads Z_Si[m, n..]
// into the accumulators; one cycle after the last step the segment is on r
// with out_valid high for one cycle. One step per cycle is accepted.
// Following the paper: the equation. Own choices: the dataflow, the
// folding, and that Z enters on the first step.
module ss_beaver_matmul
  import rr_pkg::*;
#(
  parameter int W = RING_W,
  parameter int L = LANES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                party,      // server index i
  input  logic                step_valid,
  input  logic                step_first, // k == 0: start from Z_Si
  input  logic                step_last,  // k == K-1: finish the segment
  input  logic [W-1:0]        x_s,        // X_Si[m,k]
  input  logic [W-1:0]        e,          // E[m,k] (opened)
  input  logic [L-1:0][W-1:0] f,          // F[k, n..n+L-1] (opened)
  input  logic [L-1:0][W-1:0] y_s,        // Y_Si[k, n..n+L-1]
  input  logic [L-1:0][W-1:0] z_s,        // Z_Si[m, n..n+L-1], on step_first
  output logic                out_valid,
  output logic [L-1:0][W-1:0] r           // R_Si[m, n..n+L-1]
);

  logic [W-1:0]        xe;
  logic [L-1:0][W-1:0] acc_d;

  assign xe = party ? (x_s - e) : x_s;

  always_comb begin
    for (int l = 0; l < L; l++)
      acc_d[l] = (step_first ? z_s[l] : r[l]) + W'(xe * f[l]) + W'(e * y_s[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= step_valid && step_last;
  end

  // r doubles as the accumulator; it is valid to read when out_valid is high.
  always_ff @(posedge clk) begin
    if (step_valid) r <= acc_d;
  end

endmodule
