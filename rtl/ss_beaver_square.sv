// ss_beaver_square: local step of the element-wise square <X>^2 with a
// Beaver pair (<A>, <Z>), Z = A*A. Before this step the two servers have
// opened E = X - A (ss_share_gen masks, peer exchange, ss_share_rec). Each
// server then computes on LANES lanes of Z_(2^W)
//     R_Si = Z_Si + 2*E*A_Si + (i == 0 ? E*E : 0).
// The paper's square equation adds E*E on both servers; the recovered sum
// would then be X^2 + E^2, so this unit adds the public E*E term on server 0
// only, the same way the multiplication equation lets only server 1 add the
// public -E*F term. Own choices: one register stage, latency exactly one
// cycle.
module ss_beaver_square
  import rr_pkg::*;
#(
  parameter int W = RING_W,
  parameter int L = LANES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                party,    // server index i (0 or 1)
  input  logic [L-1:0][W-1:0] e,        // opened mask E = X - A (public)
  input  logic [L-1:0][W-1:0] a_sh,     // Beaver share A_Si
  input  logic [L-1:0][W-1:0] z_sh,     // Beaver share Z_Si
  output logic                out_valid,
  output logic [L-1:0][W-1:0] r         // share of X*X
);

  logic [L-1:0][W-1:0] r_d;

  always_comb begin
    for (int l = 0; l < L; l++) begin
      r_d[l] = z_sh[l] + W'({e[l] * a_sh[l], 1'b0});
      if (!party) r_d[l] = r_d[l] + W'(e[l] * e[l]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) r <= r_d;
  end

endmodule
