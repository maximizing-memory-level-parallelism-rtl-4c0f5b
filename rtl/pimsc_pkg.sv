// pimsc_pkg: types and constants shared by the parallel in-memory stochastic
// computing (SC) engine.
//
// Time base. Every module runs on one clock whose period is half of a memory
// cycle (a "tick"). The logic-in-memory gate works in two phases, preparation
// and evaluation, one tick each, so one memory cycle is two ticks. Counting in
// ticks lets the fractional latencies of the design (2.5 cycles for Sinc,
// 1.5 cycles for an XOR in the converter) be represented exactly.
//
// Operation latencies follow the parallel-execution delays measured for the
// design (1 cycle for AND/OR operations, 2 for scaled addition and absolute
// subtraction, 2.5 for Sinc, 3 for the other transcendental chains). Approximate
// addition (OR) and negation (NOT) have no measured delay; they take the
// single-gate latency of 1 cycle, which is this design's choice.
//
// Coefficient streams of the transcendental chains are generated from m-bit
// constants round(c * 2^m); the fractions c are those of the truncated
// Maclaurin expansions (e.g. 1/42, 1/20, 1/6 for sin).
package pimsc_pkg;

  // Ticks per memory cycle.
  localparam int unsigned TICKS_PER_CYCLE = 2;

  // SC operations of the stochastic computing unit.
  typedef enum logic [3:0] {
    OP_MUL        = 4'd0,   // AND, uncorrelated inputs
    OP_MIN        = 4'd1,   // AND, correlated inputs
    OP_MAX        = 4'd2,   // OR, correlated inputs
    OP_ADD_APPROX = 4'd3,   // OR, uncorrelated inputs
    OP_SCALED_ADD = 4'd4,   // MUX with a 1/2 select stream
    OP_ABS_SUB    = 4'd5,   // XOR built as (A OR B) AND (A NAND B)
    OP_NEG        = 4'd6,   // NOT
    OP_SIN        = 4'd7,
    OP_COS        = 4'd8,
    OP_TANH       = 4'd9,
    OP_ATAN       = 4'd10,
    OP_SINC       = 4'd11,
    OP_SIGMOID    = 4'd12,
    OP_EXPN       = 4'd13,  // exp(-x)
    OP_LN1P       = 4'd14   // ln(1+x)
  } sc_op_e;

  // Placement patterns of the bit-stream generator.
  typedef enum logic [1:0] {
    PAT_1 = 2'd0,
    PAT_2 = 2'd1,
    PAT_3 = 2'd2
  } bs_pat_e;

  // Commands accepted by the engine.
  typedef enum logic [1:0] {
    CMD_MEM_WRITE = 2'd0,   // memory mode: input register -> row
    CMD_MEM_READ  = 2'd1,   // memory mode: row -> output register
    CMD_COMPUTE   = 2'd2    // computation mode: rows -> SC -> (binary -> row)
  } cmd_kind_e;

  // Latency of an SCU operation in ticks.
  function automatic int unsigned op_latency_ticks(sc_op_e op);
    case (op)
      OP_MUL, OP_MIN, OP_MAX, OP_ADD_APPROX, OP_NEG: return 1 * TICKS_PER_CYCLE;
      OP_SCALED_ADD, OP_ABS_SUB:                     return 2 * TICKS_PER_CYCLE;
      OP_SINC:                                       return 5 * TICKS_PER_CYCLE / 2;
      default:                                       return 3 * TICKS_PER_CYCLE;
    endcase
  endfunction

  // m-bit binary constant nearest to num/den * 2^m, kept below 2^m.
  function automatic int unsigned coef(int unsigned m, int unsigned num, int unsigned den);
    int unsigned v;
    v = ((num << (m + 1)) / den + 1) >> 1;
    if (v > (1 << m) - 1) v = (1 << m) - 1;
    return v;
  endfunction

endpackage
