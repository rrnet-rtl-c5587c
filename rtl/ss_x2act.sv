// ss_x2act: the trainable second-order activation
//     delta(x) = k1*x^2 + w2*x + b,   k1 = c/sqrt(N_x) * w1,
// evaluated on shares. Stage 1 is ss_beaver_square (x^2 from the opened mask
// E = X - A and the Beaver pair A_Si, Z_Si); stage 2 scales and adds locally:
//     out_Si = k1*sq_Si + w2*X_Si + (i == 0 ? b : 0).
// k1, w2 and b are public (the model vendor's trained coefficients, already
// encoded as ring elements; k1 folds c/sqrt(N_x)*w1 into one constant). The
// public constant b is added by server 0 only so that the shares sum to
// delta(x). Latency from in_valid to out_valid is exactly two cycles.
// Following the paper: the activation formula. Own choices: the two-stage
// split, precomputing k1 off-chip, and no fixed-point rescaling between the
// terms (the caller encodes k1, w2 and b so that the three terms share one
// scale).
module ss_x2act
  import rr_pkg::*;
#(
  parameter int W = RING_W,
  parameter int L = LANES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                party,
  input  logic [W-1:0]        k1,       // c/sqrt(N_x)*w1
  input  logic [W-1:0]        w2,
  input  logic [W-1:0]        b,
  input  logic [L-1:0][W-1:0] e,        // opened E = X - A
  input  logic [L-1:0][W-1:0] a_sh,     // Beaver pair share A_Si
  input  logic [L-1:0][W-1:0] z_sh,     // Beaver pair share Z_Si
  input  logic [L-1:0][W-1:0] x_sh,     // input share X_Si
  output logic                out_valid,
  output logic [L-1:0][W-1:0] r
);

  logic                sq_valid;
  logic [L-1:0][W-1:0] sq;
  logic [L-1:0][W-1:0] x_q;

  ss_beaver_square #(.W(W), .L(L)) u_sq (
    .clk, .rst_n, .in_valid, .party,
    .e, .a_sh, .z_sh,
    .out_valid(sq_valid), .r(sq)
  );

  always_ff @(posedge clk) begin
    if (in_valid) x_q <= x_sh;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= sq_valid;
  end

  always_ff @(posedge clk) begin
    if (sq_valid)
      for (int l = 0; l < L; l++)
        r[l] <= W'(k1 * sq[l]) + W'(w2 * x_q[l]) + (party ? '0 : b);
  end

endmodule
