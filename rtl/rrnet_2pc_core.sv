// rrnet_2pc_core: one server's accelerator for the polynomial operators of
// two-party (2PC) private inference over additive secret shares in
// Z_(2^W). Two identical cores, one per server, run the same command stream;
// the 'party' pin (0 or 1) selects which server's side of each equation a
// core computes. Operations (rr_pkg::op_e):
//   OP_SHR    share generation: own share r to the store bus, x - r to peer
//   OP_REC    share recovery: send own share, add the peer's
//   OP_MASK   open a Beaver mask: send X_Si - A_Si, add the peer's -> E
//   OP_LIN    scaling and addition a*X_Si + Y_Si          (ss_scale_add)
//   OP_SQ     Beaver square finish                         (ss_beaver_square)
//   OP_X2ACT  polynomial activation k1*x^2 + w2*x + b      (ss_x2act)
//   OP_MATMUL Beaver vector x matrix product               (ss_beaver_matmul)
//   OP_RCV    store the share the other party generated with OP_SHR
// A command names the operation, the number of output vectors and the
// constants. For each output vector the core gathers its operand vectors
// from the 128-bit load bus (rr_load_collect), runs the operator unit,
// exchanges a vector with the other party where the operation needs it
// (tx/rx streams, which carry the LAN link), and writes one 128-bit result
// to the store bus through a two-entry store FIFO. All streams use
// valid/ready. Load slot order per operation (one slot per beat):
//   SHR x, r | REC s | MASK x, a | LIN x, y | SQ e, a, z | X2ACT e, a, z, x
//   RCV none
//   MATMUL per step k: {lane0 X_Si[m,k], lane1 E[m,k]}, F[k,:], Y_Si[k,:],
//          and on step 0 a fourth beat Z_Si[m,:].
// Local operations (LIN, SQ, X2ACT, MATMUL) are streamed: the gather of the
// next operands starts in the cycle the current ones fire into the unit, so
// loading, computing and storing overlap. A gather that will produce a
// result starts only when the store FIFO has a free entry reserved for it
// ('owed' counts results promised and not yet stored), so a unit result is
// never dropped under store backpressure. Exchanging operations (SHR, RCV,
// REC, MASK) run one output vector at a time: gather, unit, tx, rx,
// recovery, push.
// Timing with all streams ready: a streamed operation of n beats takes n + 1
// cycles per output vector (OP_LIN 3, OP_SQ 4, OP_X2ACT 5), OP_MATMUL
// 4K + 1 per output vector of inner dimension K. For a command of C vectors,
// done is high C*(n+1) + 5 clock edges after the edge that accepts the
// command (C*(4K+1) + 5 for OP_MATMUL, one more for OP_X2ACT): one edge to
// load the command, one to arm the first gather, the unit latency, one for
// the store FIFO and one to register done. done pulses once the last
// result is stored.
// What follows the paper: the operator equations, the 32-bit ring, four
// 32-bit elements per 128-bit bus beat, loads and stores that proceed at
// the same time. The command format, the sequencing, the slot order, the
// FIFO depth and the stream handshakes are this design's own; the paper
// names a cryptographic scheduler but does not describe it, and the secure
// comparison (ReLU, MaxPool) is not part of this core.
module rrnet_2pc_core
  import rr_pkg::*;
#(
  parameter int W = RING_W,
  parameter int L = LANES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                party,     // server index i
  // command
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  cmd_t                cmd,
  output logic                done,
  // 128-bit load bus (operands)
  input  logic                ld_valid,
  output logic                ld_ready,
  input  logic [L-1:0][W-1:0] ld_data,
  // 128-bit store bus (results)
  output logic                st_valid,
  input  logic                st_ready,
  output logic [L-1:0][W-1:0] st_data,
  // to the other party
  output logic                tx_valid,
  input  logic                tx_ready,
  output logic [L-1:0][W-1:0] tx_data,
  // from the other party
  input  logic                rx_valid,
  output logic                rx_ready,
  input  logic [L-1:0][W-1:0] rx_data
);

  localparam int S  = NSLOT;
  localparam int OD = 2;      // store FIFO depth

  typedef logic [L-1:0][W-1:0] vec_t;

  typedef enum logic [3:0] {
    S_IDLE,    // wait for a command
    S_STREAM,  // local operation: gathers start back to back
    S_XARM,    // exchanging operation: reserve a FIFO entry, start gather
    S_XLOAD,   // exchanging operation: gathering
    S_WAIT,    // unit result
    S_TX,      // send to the other party
    S_RX,      // wait for the other party
    S_RECW,    // recovery register
    S_DRAIN    // wait until every result has been stored
  } state_e;

  state_e           state;
  cmd_t             cq;
  logic             local_op;       // cq.op is streamed (no exchange)
  logic [CNT_W-1:0] g_vec, g_k;     // next gather to start
  logic [CNT_W-1:0] f_k;            // step of the next gather to fire
  logic             g_more;         // gathers left to start
  vec_t             txd;

  // ---------------- load collector
  logic                      col_start, col_done, col_busy;
  logic [$clog2(S+1)-1:0]    col_n;
  logic [S-1:0][L-1:0][W-1:0] slot;

  assign col_n    = ($clog2(S+1))'(op_beats(cq.op, g_k == '0));
  assign col_busy = ld_ready;

  rr_load_collect #(.W(W), .L(L), .S(S)) u_col (
    .clk, .rst_n, .start(col_start), .nbeats(col_n),
    .ld_valid, .ld_ready, .ld_data, .done(col_done), .slot
  );

  // ---------------- store FIFO and result credits
  vec_t              ofifo [OD];
  logic              o_wr, o_rd;
  logic [1:0]        o_cnt;
  logic [1:0]        owed;          // results promised, not yet stored
  logic              push, pop, reserve;
  vec_t              push_data;

  assign st_valid = (o_cnt != '0);
  assign st_data  = ofifo[o_rd];
  assign pop      = st_valid && st_ready;

  // ---------------- gather issue
  logic g_last_k, g_result, credit_ok;

  assign g_last_k  = (g_k == cq.kdim - CNT_W'(1));
  // a gather produces a stored result unless it is a non-final matmul step
  assign g_result  = (cq.op != OP_MATMUL) || g_last_k;
  assign credit_ok = !g_result || (owed < 2'(OD));

  always_comb begin
    col_start = 1'b0;
    reserve   = 1'b0;
    if (state == S_STREAM && g_more && !col_busy && credit_ok) begin
      col_start = 1'b1;
      reserve   = g_result;
    end
    if (state == S_XARM && owed < 2'(OD)) begin
      col_start = (col_n != '0);
      reserve   = 1'b1;
    end
  end

  // ---------------- operator units, fed from the slots
  logic fire_l, fire_x;
  assign fire_l = col_done && local_op;    // streamed operations
  assign fire_x = col_done && !local_op;   // exchanging operations

  logic  gen_v, lin_v, sq_v, x2_v, mm_v, rec_v;
  vec_t  gen_own, gen_peer, lin_r, sq_r, x2_r, mm_r, rec_x;

  ss_share_gen #(.W(W), .L(L)) u_gen (
    .clk, .rst_n, .in_valid(fire_x && (cq.op == OP_SHR || cq.op == OP_MASK)),
    .x(slot[0]), .r(slot[1]), .out_valid(gen_v), .own(gen_own), .peer(gen_peer)
  );

  ss_scale_add #(.W(W), .L(L)) u_lin (
    .clk, .rst_n, .in_valid(fire_l && cq.op == OP_LIN), .a(W'(cq.a)),
    .x(slot[0]), .y(slot[1]), .out_valid(lin_v), .r(lin_r)
  );

  ss_beaver_square #(.W(W), .L(L)) u_sq (
    .clk, .rst_n, .in_valid(fire_l && cq.op == OP_SQ), .party,
    .e(slot[0]), .a_sh(slot[1]), .z_sh(slot[2]), .out_valid(sq_v), .r(sq_r)
  );

  ss_x2act #(.W(W), .L(L)) u_x2 (
    .clk, .rst_n, .in_valid(fire_l && cq.op == OP_X2ACT), .party,
    .k1(W'(cq.k1)), .w2(W'(cq.w2)), .b(W'(cq.b)),
    .e(slot[0]), .a_sh(slot[1]), .z_sh(slot[2]), .x_sh(slot[3]),
    .out_valid(x2_v), .r(x2_r)
  );

  ss_beaver_matmul #(.W(W), .L(L)) u_mm (
    .clk, .rst_n, .party,
    .step_valid(fire_l && cq.op == OP_MATMUL), .step_first(f_k == '0),
    .step_last(f_k == cq.kdim - CNT_W'(1)),
    .x_s(slot[0][0]), .e(slot[0][1]), .f(slot[1]), .y_s(slot[2]), .z_s(slot[3]),
    .out_valid(mm_v), .r(mm_r)
  );

  ss_share_rec #(.W(W), .L(L)) u_rec (
    .clk, .rst_n, .in_valid(state == S_RX && rx_valid && cq.op != OP_RCV),
    .s0(txd), .s1(rx_data), .out_valid(rec_v), .x(rec_x)
  );

  // result of the exchanging path's unit (OP_REC has no local compute)
  logic xunit_v;
  assign xunit_v = (cq.op == OP_REC) ? 1'b1 : gen_v;

  // ---------------- FIFO pushes: local unit results and exchange results
  always_comb begin
    push      = 1'b0;
    push_data = lin_r;
    if (lin_v)      begin push = 1'b1; push_data = lin_r; end
    else if (sq_v)  begin push = 1'b1; push_data = sq_r;  end
    else if (x2_v)  begin push = 1'b1; push_data = x2_r;  end
    else if (mm_v)  begin push = 1'b1; push_data = mm_r;  end
    else if (state == S_TX && tx_ready && cq.op == OP_SHR) begin
      push = 1'b1; push_data = gen_own;
    end
    else if (state == S_RX && rx_valid && cq.op == OP_RCV) begin
      push = 1'b1; push_data = rx_data;
    end
    else if (state == S_RECW && rec_v) begin
      push = 1'b1; push_data = rec_x;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_wr  <= 1'b0;
      o_rd  <= 1'b0;
      o_cnt <= '0;
      owed  <= '0;
    end else begin
      if (push) o_wr <= ~o_wr;
      if (pop)  o_rd <= ~o_rd;
      o_cnt <= o_cnt + 2'(push) - 2'(pop);
      owed  <= owed + 2'(reserve) - 2'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) ofifo[o_wr] <= push_data;
  end

  // ---------------- sequencer
  assign cmd_ready = (state == S_IDLE);
  assign tx_valid  = (state == S_TX);
  assign tx_data   = txd;
  assign rx_ready  = (state == S_RX);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cq       <= '0;
      local_op <= 1'b0;
      g_vec    <= '0;
      g_k      <= '0;
      g_more   <= 1'b0;
      f_k      <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;

      // gather issue: advance (vector, step) at every start
      if (col_start || (state == S_XARM && owed < 2'(OD))) begin
        if (cq.op == OP_MATMUL && !g_last_k) begin
          g_k <= g_k + CNT_W'(1);
        end else begin
          g_k    <= '0;
          g_vec  <= g_vec + CNT_W'(1);
          g_more <= (g_vec != cq.count - CNT_W'(1));
        end
      end
      // matmul step of the next fire
      if (fire_l && cq.op == OP_MATMUL)
        f_k <= (f_k == cq.kdim - CNT_W'(1)) ? '0 : f_k + CNT_W'(1);

      unique case (state)
        S_IDLE: if (cmd_valid) begin
          cq       <= cmd;
          local_op <= !op_sends(cmd.op) && !op_receives(cmd.op);
          g_vec    <= '0;
          g_k      <= '0;
          f_k      <= '0;
          g_more   <= 1'b1;
          state    <= (op_sends(cmd.op) || op_receives(cmd.op)) ? S_XARM : S_STREAM;
        end
        S_STREAM: if (!g_more) state <= S_DRAIN;
        S_XARM:   if (owed < 2'(OD)) state <= (cq.op == OP_RCV) ? S_RX : S_XLOAD;
        S_XLOAD:  if (fire_x) state <= S_WAIT;
        S_WAIT:   if (xunit_v) state <= S_TX;
        S_TX:     if (tx_ready) begin
          if (op_receives(cq.op)) state <= S_RX;
          else                    state <= g_more ? S_XARM : S_DRAIN;
        end
        S_RX:     if (rx_valid) begin
          if (cq.op == OP_RCV) state <= g_more ? S_XARM : S_DRAIN;
          else                 state <= S_RECW;
        end
        S_RECW:   if (rec_v) state <= g_more ? S_XARM : S_DRAIN;
        S_DRAIN:  if (owed == '0 && !col_busy && !col_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default:  state <= S_IDLE;
      endcase
    end
  end

  // peer-bound vector
  always_ff @(posedge clk) begin
    if (state == S_WAIT && xunit_v) begin
      if (cq.op == OP_REC) txd <= slot[0];
      else                 txd <= gen_peer;
    end
  end

  // stream rules: data hold steady while valid waits for ready
  a_st_hold: assert property (@(posedge clk) disable iff (!rst_n)
    st_valid && !st_ready |=> st_valid && $stable(st_data));
  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));
  // a result is only pushed into a FIFO entry reserved for it
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (o_cnt < 2'(OD)) || pop);

endmodule
