// scu: parallel stochastic computing unit.
//
// Applies one SC operation to all N bit positions of two bundles at once: lane
// q combines a[q], b[q] and the coefficient streams' bit q, so an operation
// costs a fixed number of memory cycles whatever N is.
//
// Operations (a = first operand X, b = second operand, uncorrelated copy X*
// for the transcendental chains; nand3(u,v,w) = NOT(u AND v AND w)):
//   MUL, MIN     a AND b (uncorrelated / correlated operands)
//   MAX, ADD     a OR b  (correlated / uncorrelated operands)
//   NEG          NOT a
//   SCALED_ADD   s ? b : a, s = fixed 1/2 select bundle  ((a + b) / 2)
//   ABS_SUB      (a OR b) AND (a NAND b) = a XOR b (|a - b|, correlated)
//   SIN          x2 = a&b; t = nand(x2,1/42); t = nand3(x2,1/20,t); t = nand3(x2,1/6,t); y = a & t
//   COS          x2;       t = nand(x2,1/56); nand3 with 1/30, 1/12;      y = nand3(x2,1/2,t)
//   TANH         x2;       t = nand(x2,17/42); nand3 with 2/5, 1/3;       y = a & t
//   ATAN         x2;       t = nand(x2,5/7);  nand3 with 3/5, 1/3;        y = a & t
//   SINC         x2;       t = nand(x2,1/42); nand3 with 1/20;            y = nand3(x2,1/6,t)
//   SIGMOID      x2;       t = nand(x2,1/10); t = nand3(x2,1/12,t); t = nand3(a,1/2,t); y = nand(1/2',t)
//   EXPN         t = nand(b,1/5); t = nand3(a,1/4,t); t = nand3(b,1/3,t); t = nand3(a,1/2,t); y = nand(b,t)
//   LN1P         t = nand(a,4/5); t = nand3(b,3/4,t); t = nand3(a,2/3,t); t = nand3(b,1/2,t); y = a & t
// Each chain is the Horner form of the truncated Maclaurin series of the
// function, e.g. sin x ~ x(1 - x^2/6(1 - x^2/20(1 - x^2/42))). The gate types
// and coefficients are those published for the design. The chains are purely
// combinational (no decorrelating flip-flops); deterministic bundles make that
// possible. Coefficient bundles come from bs_gen instances fed with
// round(c * 2^M) and placement PAT_3 (this design's choice of pattern).
// Two departures from the published gate chains, both to keep copies of the
// same value independent: the second 1/2 of sigmoid (1/2') is a separate
// bundle with pattern HALF2_PAT, and exp(-x) / ln(1+x), drawn with a single x
// input, alternate between the two operand copies a = X and b = X*. With a
// single copy every x AND x collapses to x and the error exceeds 0.1.
// The select of the scaled addition is a fixed 1/2 bundle (sel_half) rather
// than a generated coefficient, also this design's choice; it halves every
// digit group of both operand patterns exactly.
//
// The two-input AND/OR/NAND/NOR operations are evaluated by one lim_cell per
// lane: operands are programmed in the tick that start is sampled
// (preparation) and sensed in the next (evaluation). The transcendental chains
// and the MUX are evaluated from the operands captured at start.
//
// Timing: start is sampled with op, a and b; done pulses high for one tick
// exactly op_latency_ticks(op) ticks later (2 = 1 cycle for AND/OR/NOT,
// 4 for scaled add and abs-sub, 5 for Sinc, 6 for the other functions), and
// result is valid from then until the next start. start while busy is ignored.
module scu #(
  parameter int unsigned M = 6,
  parameter int unsigned N = 1 << M,
  parameter pimsc_pkg::bs_pat_e HALF2_PAT = pimsc_pkg::PAT_2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  pimsc_pkg::sc_op_e  op,
  input  logic [N-1:0]       a,
  input  logic [N-1:0]       b,
  output logic [N-1:0]       result,
  output logic               done,
  output logic               busy
);
  import pimsc_pkg::*;

  // ---------------- coefficient bundles ----------------
  typedef enum int unsigned {
    C_1_42, C_1_20, C_1_6, C_1_56, C_1_30, C_1_12, C_1_2, C_17_42, C_2_5, C_1_3,
    C_5_7, C_3_5, C_1_10, C_4_5, C_3_4, C_2_3, C_1_5, C_1_4, NCOEF
  } coef_e;

  localparam int unsigned CNUM [NCOEF] = '{1, 1, 1, 1, 1, 1, 1, 17, 2, 1, 5, 3, 1, 4, 3, 2, 1, 1};
  localparam int unsigned CDEN [NCOEF] = '{42, 20, 6, 56, 30, 12, 2, 42, 5, 3, 7, 5, 10, 5, 4, 3, 5, 4};

  logic [N-1:0] c [NCOEF];

  for (genvar k = 0; k < int'(NCOEF); k++) begin : g_coef
    bs_gen #(.M(M), .N(N)) u_gen (
      .x     (M'(coef(M, CNUM[k], CDEN[k]))),
      .pat   (PAT_3),
      .stream(c[k])
    );
  end

  // Second, independent 1/2 bundle for the last sigmoid stage.
  logic [N-1:0] half2;
  bs_gen #(.M(M), .N(N)) u_half2 (.x(M'(1 << (M - 1))), .pat(HALF2_PAT), .stream(half2));

  // Select bundle of the scaled addition: position q is 1 when q[M-1] XOR q[0]
  // is 1 (N/2 ones, a fixed row pattern). Every digit group of a PAT_1 operand
  // has its top position bit free and its bit 0 fixed, and a PAT_2 operand the
  // other way round (apart from the single copy of digit 0), so this select
  // takes exactly half of each group of either operand.
  logic [N-1:0] sel_half;
  always_comb
    for (int unsigned q = 0; q < N; q++) sel_half[q] = q[M-1] ^ q[0];

  // ---------------- control ----------------
  sc_op_e       op_r;
  logic [N-1:0] a_r, b_r;
  logic [3:0]   cnt;         // ticks since start, 0 = idle
  logic [3:0]   lat;

  assign lat  = 4'(op_latency_ticks(op_r));
  assign busy = (cnt != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_r <= OP_MUL;
      a_r  <= '0;
      b_r  <= '0;
      cnt  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        op_r <= op;
        a_r  <= a;
        b_r  <= b;
        cnt  <= 4'd1;
      end else if (busy) begin
        if (cnt == lat - 4'd1) begin
          done <= 1'b1;
          cnt  <= '0;
        end else begin
          cnt <= cnt + 4'd1;
        end
      end
    end
  end

  // ---------------- LIM gates, one per lane ----------------
  logic         prep, eval;
  logic [N-1:0] l_nor, l_or, l_nand, l_and;
  logic [N-1:0] b_in;

  assign prep = !busy && start;
  assign eval = (cnt == 4'd1);
  assign b_in = (op == OP_NEG) ? a : b;   // NOT a = a NOR a

  for (genvar q = 0; q < int'(N); q++) begin : g_lane
    lim_cell u_lim (
      .clk     (clk),
      .rst_n   (rst_n),
      .prep    (prep),
      .eval    (eval),
      .a       (a[q]),
      .b       (b_in[q]),
      .out_nor (l_nor[q]),
      .out_or  (l_or[q]),
      .out_nand(l_nand[q]),
      .out_and (l_and[q])
    );
  end

  // ---------------- multi-step operations ----------------
  logic [N-1:0] x2, t1, t2, t3, t4, chain_c, chain_r;

  always_comb begin
    x2 = a_r & b_r;
    t1 = '0;
    t2 = '0;
    t3 = '0;
    t4 = '0;
    case (op_r)
      OP_SCALED_ADD: chain_c = (sel_half & b_r) | (~sel_half & a_r);
      OP_ABS_SUB:    chain_c = l_or & l_nand;
      OP_SIN: begin
        t1 = ~(x2 & c[C_1_42]);
        t2 = ~(x2 & c[C_1_20] & t1);
        t3 = ~(x2 & c[C_1_6]  & t2);
        chain_c = a_r & t3;
      end
      OP_COS: begin
        t1 = ~(x2 & c[C_1_56]);
        t2 = ~(x2 & c[C_1_30] & t1);
        t3 = ~(x2 & c[C_1_12] & t2);
        chain_c = ~(x2 & c[C_1_2] & t3);
      end
      OP_TANH: begin
        t1 = ~(x2 & c[C_17_42]);
        t2 = ~(x2 & c[C_2_5] & t1);
        t3 = ~(x2 & c[C_1_3] & t2);
        chain_c = a_r & t3;
      end
      OP_ATAN: begin
        t1 = ~(x2 & c[C_5_7]);
        t2 = ~(x2 & c[C_3_5] & t1);
        t3 = ~(x2 & c[C_1_3] & t2);
        chain_c = a_r & t3;
      end
      OP_SINC: begin
        t1 = ~(x2 & c[C_1_42]);
        t2 = ~(x2 & c[C_1_20] & t1);
        chain_c = ~(x2 & c[C_1_6] & t2);
      end
      OP_SIGMOID: begin
        t1 = ~(x2 & c[C_1_10]);
        t2 = ~(x2 & c[C_1_12] & t1);
        t3 = ~(a_r & c[C_1_2] & t2);
        chain_c = ~(half2 & t3);
      end
      OP_EXPN: begin
        t1 = ~(b_r & c[C_1_5]);
        t2 = ~(a_r & c[C_1_4] & t1);
        t3 = ~(b_r & c[C_1_3] & t2);
        t4 = ~(a_r & c[C_1_2] & t3);
        chain_c = ~(b_r & t4);
      end
      OP_LN1P: begin
        t1 = ~(a_r & c[C_4_5]);
        t2 = ~(b_r & c[C_3_4] & t1);
        t3 = ~(a_r & c[C_2_3] & t2);
        t4 = ~(b_r & c[C_1_2] & t3);
        chain_c = a_r & t4;
      end
      default: chain_c = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          chain_r <= '0;
    else if (busy && cnt == lat - 4'd1)  chain_r <= chain_c;
  end

  always_comb begin
    case (op_r)
      OP_MUL, OP_MIN:        result = l_and;
      OP_MAX, OP_ADD_APPROX: result = l_or;
      OP_NEG:                result = l_nor;
      default:               result = chain_r;
    endcase
  end

  // The tick counter never runs past the operation's latency.
  a_cnt_bound: assert property (@(posedge clk) disable iff (!rst_n) busy |-> cnt < lat);
endmodule
