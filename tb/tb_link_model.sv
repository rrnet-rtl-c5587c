// tb_link_model: behavioural model of one direction of the network link
// between the two servers (Ethernet through a router in the real system,
// which is not part of the RTL). It accepts 128-bit vectors on a
// valid/ready input (ready drops at random when RANDOM_READY is set, to model
// a busy transmitter), holds each for LATENCY cycles of flight time, and
// delivers them in order on a valid/ready output. Simulation only.
module tb_link_model #(
  parameter int W = 32,
  parameter int L = 4,
  parameter int LATENCY = 5,
  parameter bit RANDOM_READY = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [L-1:0][W-1:0] in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [L-1:0][W-1:0] out_data
);
  typedef struct { logic [L-1:0][W-1:0] d; longint t; } pkt_t;
  pkt_t   q[$];
  longint now = 0;

  always @(posedge clk) begin
    now <= now + 1;
    if (!rst_n) begin
      q.delete();
      in_ready  <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back('{in_data, now + LATENCY});
      in_ready <= RANDOM_READY ? ($urandom % 4 != 0) : 1'b1;
      // present the head once its flight time is over
      if (q.size() > 0) begin
        out_valid <= (q[0].t <= now);
        out_data  <= q[0].d;
      end else begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
