// tb_sc_accuracy: accuracy workload of the SC unit at the two bundle lengths
// the design is evaluated with, N = 16 (M = 4) and N = 64 (M = 6), with and
// without random noise on the inputs.
//
// For each length it sweeps the operands of the five basic operations
// (multiply, scaled addition, absolute subtraction, minimum, maximum) and the
// single input of the eight function chains (sin, cos, tanh, arctan, Sinc,
// sigmoid, exp(-x), ln(1+x)). Operand bundles are built by the reference
// generator: X with pattern 1, the second operand or the copy X* with pattern
// 2, and the correlated operand of min / max / abs-subtract with pattern 1 as
// well. Noise is injected by flipping each operand bundle bit with
// probability 0, 10 or 30 %, as a soft error in the stored bundle would.
//
// Every result bundle is compared bit for bit with the reference model on the
// same (noisy) operands. The mean absolute error of the result count against
// the exact real-valued result of the clean inputs is printed per operation,
// length and noise level, and checked against bounds:
//   noise-free, N = 64: multiply, scaled addition and the function chains
//     stay below the bounds set from this design's measurements; min, max and
//     abs-subtract are expected to be off by more, because correlated digit-copy
//     bundles give the bitwise AND / OR / XOR of the words;
//   N = 64 is no worse than N = 16 for multiply and the functions on average;
//   30 % noise raises the multiply error by less than 0.2 (graceful
//   degradation rather than the collapse a flipped binary MSB causes).
module tb_sc_accuracy;
  import pimsc_pkg::*;
  import tb_sc_model_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic        start4 = 0, start6 = 0;
  sc_op_e      op = OP_MUL;
  logic [15:0] a4 = '0, b4 = '0, r4;
  logic [63:0] a6 = '0, b6 = '0, r6;
  logic        done4, busy4, done6, busy6;

  scu #(.M(4)) dut4 (.clk, .rst_n, .start(start4), .op, .a(a4), .b(b4), .result(r4), .done(done4), .busy(busy4));
  scu #(.M(6)) dut6 (.clk, .rst_n, .start(start6), .op, .a(a6), .b(b6), .result(r6), .done(done6), .busy(busy6));

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bundle_t noisy(int m, bundle_t s, int pct);
    for (int q = 0; q < (1 << m); q++)
      if ($urandom_range(0, 99) < pct) s[q] = ~s[q];
    return s;
  endfunction

  // Run one operation on the unit of size m; return the result's ones count.
  task automatic run(int m, sc_op_e o, bundle_t ea, bundle_t eb, output int cnt);
    bundle_t er, got;
    int t;
    er = op_model(m, o, ea, eb);
    @(negedge clk);
    op = o;
    if (m == 4) begin a4 = ea[15:0]; b4 = eb[15:0]; start4 = 1; end
    else        begin a6 = ea[63:0]; b6 = eb[63:0]; start6 = 1; end
    @(negedge clk);
    start4 = 0; start6 = 0;
    t = 1;
    while (!(m == 4 ? done4 : done6) && t < 20) begin @(negedge clk); t++; end
    got = '0;
    if (m == 4) got[15:0] = r4; else got[63:0] = r6;
    checks++;
    if (got !== er) begin
      failures++;
      $display("M=%0d %s: result %h, model %h", m, o.name(), got, er);
    end
    cnt = ones(m, got);
  endtask

  function automatic real exact2(sc_op_e o, real x, real y);
    case (o)
      OP_MUL:        return x * y;
      OP_SCALED_ADD: return (x + y) / 2.0;
      OP_ABS_SUB:    return (x > y) ? x - y : y - x;
      OP_MIN:        return (x < y) ? x : y;
      default:       return (x > y) ? x : y;
    endcase
  endfunction

  // mae[length index][noise index][op]
  real mae [2][3][15];

  initial begin
    sc_op_e basic [5] = '{OP_MUL, OP_SCALED_ADD, OP_ABS_SUB, OP_MIN, OP_MAX};
    int noise [3] = '{0, 10, 30};
    int m, n, cnt, step, cases;
    real err, sum4, sum6;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int li = 0; li < 2; li++) begin
      m = (li == 0) ? 4 : 6;
      n = 1 << m;
      step = (li == 0) ? 1 : 3;
      for (int ni = 0; ni < 3; ni++) begin
        foreach (basic[k]) begin
          sc_op_e o;
          logic corr;
          o = basic[k];
          corr = (o == OP_ABS_SUB || o == OP_MIN || o == OP_MAX);
          mae[li][ni][o] = 0.0;
          cases = 0;
          for (int x = 0; x < n; x += step)
            for (int y = 0; y < n; y += step) begin
              run(m, o, noisy(m, gen(m, x, 0), noise[ni]), noisy(m, gen(m, y, corr ? 0 : 1), noise[ni]), cnt);
              err = real'(cnt) / n - exact2(o, real'(x) / n, real'(y) / n);
              mae[li][ni][o] += (err < 0.0) ? -err : err;
              cases++;
            end
          mae[li][ni][o] /= cases;
        end
        for (int o = 7; o <= 14; o++) begin
          mae[li][ni][o] = 0.0;
          for (int x = 0; x < n; x++) begin
            run(m, sc_op_e'(o), noisy(m, gen(m, x, 0), noise[ni]), noisy(m, gen(m, x, 1), noise[ni]), cnt);
            err = real'(cnt) / n - f_ref(sc_op_e'(o), real'(x) / n);
            mae[li][ni][o] += (err < 0.0) ? -err : err;
          end
          mae[li][ni][o] /= n;
        end
      end
    end
    $display("mean absolute error, %% of full scale (N=16: 0/10/30 %% noise | N=64: 0/10/30 %% noise)");
    for (int o = 0; o <= 14; o++) begin
      sc_op_e so;
      so = sc_op_e'(o);
      if (o == 3 || o == 6) continue;
      $display("  %-14s %6.2f %6.2f %6.2f | %6.2f %6.2f %6.2f", so.name(),
               100.0 * mae[0][0][o], 100.0 * mae[0][1][o], 100.0 * mae[0][2][o],
               100.0 * mae[1][0][o], 100.0 * mae[1][1][o], 100.0 * mae[1][2][o]);
    end
    // bounds
    checks++; if (mae[1][0][OP_MUL] > 0.02)        begin failures++; $display("multiply error too large"); end
    checks++; if (mae[1][0][OP_SCALED_ADD] > 0.02) begin failures++; $display("scaled addition error too large"); end
    for (int o = 7; o <= 13; o++) begin
      checks++; if (mae[1][0][o] > 0.05) begin failures++; $display("op %0d error too large", o); end
    end
    checks++; if (mae[1][0][OP_LN1P] > 0.12) begin failures++; $display("ln(1+x) error too large"); end
    sum4 = 0.0; sum6 = 0.0;
    for (int o = 7; o <= 14; o++) begin sum4 += mae[0][0][o]; sum6 += mae[1][0][o]; end
    sum4 += mae[0][0][OP_MUL]; sum6 += mae[1][0][OP_MUL];
    checks++; if (sum6 > sum4) begin failures++; $display("N=64 no better than N=16"); end
    checks++; if (mae[1][2][OP_MUL] - mae[1][0][OP_MUL] > 0.2) begin failures++; $display("multiply collapses under noise"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
