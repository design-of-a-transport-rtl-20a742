// tta_pkg: types, port identifiers and arithmetic shared by the turbo-decoder TTA.
//
// The processor is a transport-triggered architecture: an instruction holds one move slot per
// bus, and each move copies a source port (or an immediate) to a destination port. Writing a
// unit's trigger port starts its operation; the operation code travels with the move.
//
// This package holds
//  * the move-slot format and the identifiers of every source and destination port,
//  * the operation codes of each unit,
//  * the 3GPP turbo-code trellis (constituent encoder 1+D+D^3 / 1+D^2+D^3), and
//  * max*, the Jacobian logarithm, in the four variants the METRIC and MAX7 units select by mode.
//
// From the paper: the four MAP variants, their order as modes 1..4 (here opcodes 0..3), the
// branch metric gamma = +-(LuI+LcI1) +- LcI2, and the use of a single trellis butterfly unit.
// Own choices: the 32-bit word, 3 fractional bits of the LLR fixed point, the correction
// constants of the three log-MAP approximations, the per-mode latencies, the move format and
// the numbering of ports.
package tta_pkg;

  localparam int unsigned DATA_W    = 32;
  typedef logic signed [DATA_W-1:0] word_t;

  // ---------------------------------------------------------------- fixed point and max*
  localparam int FRAC_BITS = 3;                 // LLRs and metrics carry 3 fractional bits
  // constant-log-MAP: + C when |x-y| <= T
  localparam int CONST_C   = 4;                 // 0.5
  localparam int CONST_T   = 12;                // 1.5
  // linear-log-MAP: + SLOPE*(T-|x-y|) when |x-y| <= T, SLOPE in 1/256 units
  localparam int LIN_T     = 20;                // 2.5
  localparam int LIN_SLOPE = 64;                // 0.25
  // log-MAP: + ln(1+exp(-|x-y|)) from a table for |x-y| < LOG_TAB_N (in 1/8 units)
  localparam int LOG_TAB_N = 22;

  typedef enum logic [3:0] {
    MODE_MAXLOG = 4'd0,   // table mode 1
    MODE_LINEAR = 4'd1,   // table mode 2
    MODE_CONST  = 4'd2,   // table mode 3
    MODE_LOGMAP = 4'd3    // table mode 4
  } map_mode_e;

  // Latency in cycles from trigger to result for METRIC and MAX7, per mode.
  localparam int MAX_MODE_LAT = 3;
  function automatic int unsigned mode_latency(input logic [3:0] mode);
    case (mode[1:0])
      2'd0:    return 1;
      2'd1:    return 3;     // multiply in the correction term
      2'd2:    return 2;     // compare against the threshold
      default: return 3;     // table look-up
    endcase
  endfunction

  // ln(1+exp(-z/8)) * 8, rounded, for z = 0 .. LOG_TAB_N-1.
  function automatic word_t log_corr(input word_t d);
    word_t c;
    case (d)
      0: c = 6;
      1, 2: c = 5;
      3, 4: c = 4;
      5, 6, 7, 8: c = 3;
      9, 10, 11, 12: c = 2;
      13, 14, 15, 16, 17, 18, 19, 20, 21: c = 1;
      default: c = 0;
    endcase
    return c;
  endfunction

  function automatic word_t max_star(input word_t x, input word_t y, input logic [3:0] mode);
    word_t m, d, c;
    m = (x > y) ? x : y;
    d = (x > y) ? x - y : y - x;
    case (mode[1:0])
      2'd0: c = '0;
      2'd1: c = (d <= LIN_T) ? (((LIN_T - d) * LIN_SLOPE) >>> 8) : '0;
      2'd2: c = (d <= CONST_T) ? word_t'(CONST_C) : '0;
      default: c = log_corr(d);
    endcase
    return m + c;
  endfunction

  // ---------------------------------------------------------------- 3GPP trellis
  // State s = {s1,s2,s3} (s1 newest). Feedback a = u ^ s2 ^ s3, parity p = a ^ s1 ^ s3,
  // next state {a,s1,s2}. States print as 1..8 in the trellis figure; here they are 0..7.
  localparam int NUM_STATES = 8;
  function automatic logic [2:0] trellis_next(input logic [2:0] s, input logic u);
    logic a;
    a = u ^ s[1] ^ s[0];
    return {a, s[2], s[1]};
  endfunction
  function automatic logic trellis_parity(input logic [2:0] s, input logic u);
    logic a;
    a = u ^ s[1] ^ s[0];
    return a ^ s[2] ^ s[0];
  endfunction

  // ---------------------------------------------------------------- move format
  localparam int NUM_GUARDS  = 2;
  localparam int SRC_W       = 20;   // immediate width, or a source port id in the low bits
  localparam int PORT_ID_W   = 12;
  localparam int OPC_W       = 4;
  localparam int IDX_W       = 6;    // register index within a register file

  typedef struct packed {
    logic                   guard_en;   // move only if the guard holds
    logic                   guard_inv;  // guard on the inverted boolean
    logic                   guard_idx;  // which boolean register
    logic                   src_imm;    // source is the sign-extended immediate
    logic [SRC_W-1:0]       src;        // immediate, or source port id
    logic [PORT_ID_W-1:0]   dst;        // destination port id, 0 = no move
    logic [OPC_W-1:0]       opc;        // operation, for trigger ports
  } move_t;
  localparam int MOVE_W = $bits(move_t);

  // Source port ids.
  localparam int SRC_LSU      = 16;   // + unit
  localparam int SRC_ALU      = 32;   // + unit
  localparam int SRC_SIN_DATA = 48;   // + unit
  localparam int SRC_SIN_STAT = 64;   // + unit
  localparam int SRC_SOUT_STAT= 80;   // + unit
  localparam int SRC_METRIC   = 96;   // + output 0..7
  localparam int SRC_MAX7     = 104;
  localparam int SRC_BOOL     = 112;  // + register
  localparam int SRC_GCU_RA   = 120;
  localparam int SRC_RF       = 256;  // + 64*file + register

  // Destination port ids. For units, the last port of each is the trigger.
  localparam int DST_LSU      = 16;   // + 2*unit + {0 store data, 1 address/trigger}
  localparam int DST_ALU      = 48;   // + 2*unit + {0 in1, 1 in2/trigger}
  localparam int DST_SIN      = 96;   // + unit (trigger)
  localparam int DST_SOUT     = 112;  // + unit (trigger, value to write)
  localparam int DST_METRIC   = 128;  // + 0..7 metrics, 8 a priori, 9 systematic, 10 parity/trigger
  localparam int DST_MAX7     = 144;  // + 0..6, 6 is the trigger
  localparam int DST_BOOL     = 160;  // + register
  localparam int DST_GCU_RA   = 168;
  localparam int DST_GCU      = 169;  // trigger: jump target
  localparam int DST_RF       = 256;  // + 64*file + register
  localparam int RF_SPAN      = 64;

  // Operation codes.
  typedef enum logic [3:0] {
    ALU_ADD = 4'd0, ALU_SUB = 4'd1, ALU_AND = 4'd2, ALU_IOR = 4'd3, ALU_XOR = 4'd4,
    ALU_SHL = 4'd5, ALU_SHR = 4'd6, ALU_SHRU = 4'd7, ALU_EQ = 4'd8, ALU_GT = 4'd9,
    ALU_GTU = 4'd10, ALU_MUL = 4'd11, ALU_MAX = 4'd12, ALU_MIN = 4'd13
  } alu_op_e;
  typedef enum logic [3:0] { LSU_LDW = 4'd0, LSU_STW = 4'd1 } lsu_op_e;
  typedef enum logic [3:0] { STREAM_RW = 4'd0, STREAM_STATUS = 4'd1 } stream_op_e;
  typedef enum logic [3:0] { GCU_JUMP = 4'd0, GCU_CALL = 4'd1 } gcu_op_e;

endpackage
