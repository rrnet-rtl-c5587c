// rr_load_collect: gathers the operand vectors of one operation from the
// 128-bit load bus (four 32-bit ring elements per beat, as in the paper's
// hardware setup). A start pulse with nbeats arms it; it then accepts beats
// with a valid/ready handshake and writes beat j into slot j. One cycle
// after the last beat is accepted, done is high for one cycle and the slots
// hold the operands until the next start. With ld_valid held high, nbeats
// beats take exactly nbeats cycles. The slot order per operation is fixed
// by the core (rrnet_2pc_core); the handshake is this design's own choice.
module rr_load_collect
  import rr_pkg::*;
#(
  parameter int W = RING_W,
  parameter int L = LANES,
  parameter int S = NSLOT
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [$clog2(S+1)-1:0]     nbeats,   // 1..S
  input  logic                       ld_valid,
  output logic                       ld_ready,
  input  logic [L-1:0][W-1:0]        ld_data,
  output logic                       done,
  output logic [S-1:0][L-1:0][W-1:0] slot
);

  typedef logic [$clog2(S+1)-1:0] cnt_t;

  logic busy;
  cnt_t cnt, last;

  assign ld_ready = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      last <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        cnt  <= '0;
        last <= nbeats - cnt_t'(1);
      end else if (busy && ld_valid) begin
        cnt <= cnt + cnt_t'(1);
        if (cnt == last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy && ld_valid) slot[cnt[$clog2(S)-1:0]] <= ld_data;
  end

  // A start may only come while idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
