// rr_pkg: constants and types shared by the two-party (2PC) secret-sharing
// operator core. Values are additive shares over the ring Z_(2^RING_W); the
// arithmetic wraps modulo 2^RING_W, so plain W-bit adders and multipliers
// implement the ring. The 32-bit ring and the four lanes (one 128-bit bus
// word holds four 32-bit values) follow the paper's hardware setup; the
// opcode set and its encoding are this design's own.
package rr_pkg;

  parameter int RING_W = 32;  // fixed-point ring size (paper: 32 bits)
  parameter int LANES  = 4;   // 128-bit load/store bus / 32-bit data
  parameter int NSLOT  = 4;   // operand vectors one operation may read

  // Operations of the core. Encoding is an implementation choice.
  typedef enum logic [2:0] {
    OP_SHR    = 3'd0,  // share generation: (x, r) -> own r, peer x - r
    OP_REC    = 3'd1,  // share recovery:   own + peer
    OP_MASK   = 3'd2,  // Beaver masking:   rec(x - a) -> E (or F)
    OP_LIN    = 3'd3,  // scaling and addition: a*X + Y
    OP_SQ     = 3'd4,  // Beaver square finish
    OP_X2ACT  = 3'd5,  // polynomial activation
    OP_MATMUL = 3'd6,  // Beaver vector x matrix product
    OP_RCV    = 3'd7   // receive the share the other party generated
  } op_e;

  // Number of 128-bit load beats an operation gathers per output vector.
  // OP_MATMUL gathers 3 per inner-product step, plus the Z beat on step 0.
  function automatic int unsigned op_beats(op_e op, logic first_step);
    case (op)
      OP_SHR:    return 2;
      OP_REC:    return 1;
      OP_MASK:   return 2;
      OP_LIN:    return 2;
      OP_SQ:     return 3;
      OP_X2ACT:  return 4;
      OP_MATMUL: return first_step ? 4 : 3;
      OP_RCV:    return 0;
      default:   return 1;
    endcase
  endfunction

  // Operations that send a vector to the other party ...
  function automatic logic op_sends(op_e op);
    return (op == OP_SHR) || (op == OP_REC) || (op == OP_MASK);
  endfunction

  // ... and those that wait for the other party's vector.
  function automatic logic op_receives(op_e op);
    return (op == OP_REC) || (op == OP_MASK) || (op == OP_RCV);
  endfunction

  // Command word: one operation over 'count' output vectors (LANES elements
  // each); OP_MATMUL runs 'kdim' inner-product steps per output vector. The
  // public constants travel with the command. Field widths are own choices.
  parameter int CNT_W = 16;   // up to 65535 output vectors / inner steps

  typedef struct packed {
    op_e               op;
    logic [CNT_W-1:0]  count;  // output vectors, >= 1
    logic [CNT_W-1:0]  kdim;   // OP_MATMUL inner dimension K, >= 1
    logic [RING_W-1:0] a;      // OP_LIN scalar
    logic [RING_W-1:0] k1;     // OP_X2ACT c/sqrt(N_x)*w1
    logic [RING_W-1:0] w2;     // OP_X2ACT linear coefficient
    logic [RING_W-1:0] b;      // OP_X2ACT bias (server 0 adds it)
  } cmd_t;

endpackage
