// vitallm_pkg: types and constants shared by the ternary LLM accelerator.
//
// Array geometry (8x8 PEs per core, three TINT cores, 52 unpacking LUTs,
// 16-bit partial sums, Top-32, unified softmax maximum of 16) follows the
// paper's figures and text. The ternary 2-bit code (+1 = 01, 0 = 00,
// -1 = 11) is the one the paper stores and pads into a Booth window.
// The base-3 byte packing order and every command format below are this
// design's own choices.
package vitallm_pkg;

  localparam int unsigned ARR        = 8;    // PE rows / columns of each core
  localparam int unsigned ACT_W      = 8;    // INT8 activations
  localparam int unsigned PSUM_W     = 16;   // accumulator output width
  localparam int unsigned N_TINT     = 3;    // TINT cores
  localparam int unsigned N_LUT      = 52;   // unpacking LUTs
  localparam int unsigned TRITS_PER_BYTE = 5;
  localparam int unsigned IB_LANES   = 32;   // intermediate buffer write lanes
  localparam int unsigned LO_W       = 4;    // sign + 3-bit leading-one position
  localparam int unsigned M_UNIFIED  = 16;   // static softmax maximum
  localparam int unsigned TOPK       = 32;

  // Ternary code, stored form of Table 1(b).
  localparam logic [1:0] T_POS  = 2'b01;
  localparam logic [1:0] T_ZERO = 2'b00;
  localparam logic [1:0] T_NEG  = 2'b11;

  typedef enum logic {BF_INT8 = 1'b0, BF_TERNARY = 1'b1} bf_mode_e;

  typedef enum logic [1:0] {
    NL_QUANT   = 2'd0,   // absmax quantization only
    NL_RMSNORM = 2'd1,   // x*gamma, sum of squares, then quantization
    NL_SOFTMAX = 2'd2    // exp(x - M_unified), sum, then quantization
  } nl_mode_e;

  // Decode one packed byte into five 2-bit ternary codes.
  // byte = sum_i (w_i + 1) * 3^i, i = 0..4; trit i lands in bits [2i+1:2i].
  // Bytes above 242 are not produced by the packer and decode to zeros.
  function automatic logic [9:0] unpack_byte(input logic [7:0] b);
    logic [9:0] r;
    int unsigned v;
    r = '0;
    v = int'(b);
    if (v <= 242) begin
      for (int i = 0; i < 5; i++) begin
        case (v % 3)
          0:       r[2*i +: 2] = T_NEG;
          1:       r[2*i +: 2] = T_ZERO;
          default: r[2*i +: 2] = T_POS;
        endcase
        v = v / 3;
      end
    end
    return r;
  endfunction

  // Projection command: ternary GEMV on the TINT cores (+ BoothFlex).
  typedef struct packed {
    logic [1:0]  src_bank;   // quantized-buffer bank holding the input vector
    logic [10:0] src_row;    // first 8-element row of the input vector
    logic [10:0] n_in;       // input tiles (8 elements each)
    logic [10:0] n_out;      // output groups (24 or 32 outputs each)
    logic [10:0] dst_row;    // first intermediate-buffer row written
    logic        use_bf;     // BoothFlex assists in ternary mode (WO / FFN)
    logic        produce;    // completes the Q/K/V projection of one head
    logic        wait_q;     // wait for the previous vector's quantization
  } proj_cmd_t;

  // Attention command: INT8 GEMV on the BoothFlex core (QK^T or SV).
  typedef struct packed {
    logic [1:0]  src_bank;   // quantized-buffer bank of the INT8 vector
    logic [10:0] src_row;
    logic [10:0] n_in;       // input tiles
    logic [10:0] n_out;      // output groups of 8
    logic [10:0] dst_row;
    logic [1:0]  dst_q;      // 8-lane quarter of the row written
    logic        head_first; // first command of a head: needs a produced head
    logic        head_last;  // last command of a head: frees its buffer slot
  } attn_cmd_t;

  // Nonlinear command: two-stage operation on a vector in the intermediate buffer.
  typedef struct packed {
    nl_mode_e    mode;
    logic [10:0] src_row;
    logic [1:0]  src_q0;     // first quarter used in each row
    logic [2:0]  tpr;        // tiles (quarters) per row, 1..4
    logic [10:0] n_tiles;
    logic [1:0]  dst_bank;
    logic [10:0] dst_row;
    logic [15:0] in_scale;   // softmax: logit = x * in_scale / 2^16 (Q8.8 result)
  } nl_cmd_t;

  // Leading-one prediction command.
  typedef struct packed {
    logic [10:0] q_row;
    logic [1:0]  q_q0;
    logic [2:0]  q_tpr;
    logic [4:0]  n_dtiles;   // head-dimension tiles (8 dims each)
    logic [3:0]  last_dims;  // valid dims in the last tile, 1..8
    logic [12:0] n_tok;      // tokens scored, 1..MAX_SEQ
  } lop_cmd_t;

  // Event pulses brought out of the top for observation.
  typedef struct packed {
    logic head_credit_stall; // producer waits: two heads already buffered
    logic attn_head_wait;    // consumer waits: no produced head
    logic overlap;           // projection and attention busy in the same cycle
    logic bf_to_ternary;     // BoothFlex switched to ternary mode
    logic bf_to_int8;        // BoothFlex switched back to INT8 mode
    logic bf_busy_stall;     // BoothFlex-assisted projection waits for attention
    logic quant_barrier;     // projection waits at the vector barrier
    logic wr_conflict;       // an intermediate-buffer write request was refused
  } events_t;

endpackage
