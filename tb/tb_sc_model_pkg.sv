// tb_sc_model_pkg: reference model used by the testbenches.
//
// Written independently of the RTL: bundles are built by walking the stream
// positions and looking up which binary digit each one copies, SC operations
// are evaluated one bit position at a time, and counts use a plain loop.
// Bundles are carried in a 256-bit vector; only the low N bits are meaningful.
package tb_sc_model_pkg;
  import pimsc_pkg::*;

  // Pattern of the second 1/2 bundle of the sigmoid chain.
  localparam int H2PAT = 1;

  typedef logic [255:0] bundle_t;

  // Which digit of x position q of a bundle copies (m = tied to zero).
  function automatic int digit_of(int m, int pat, int q);
    int n, p, src, tz, fig2 [8], fig3 [8];
    n = 1 << m;
    fig2 = '{2, 1, 0, 2, 2, 3, 1, 2};
    fig3 = '{2, 1, 0, 2, 1, 2, 2, 3};
    if (m == 3 && pat == 1) return fig2[q];
    if (m == 3 && pat == 2) return fig3[q];
    if (pat == 1) begin            // position index bit-reversed
      p = 0;
      for (int i = 0; i < m; i++) if (q[i]) p += 1 << (m - 1 - i);
    end else if (pat == 2) begin   // position index rotated by m/2 bits
      p = ((q * (1 << (m / 2))) % n) + (q / (1 << (m - m / 2)));
    end else begin
      p = q;
    end
    if (p == n - 1) return m;
    src = p + 1;
    tz = 0;
    while (src % 2 == 0) begin
      src = src / 2;
      tz++;
    end
    return m - 1 - tz;
  endfunction

  function automatic bundle_t gen(int m, int x, int pat);
    bundle_t s;
    int d;
    s = '0;
    for (int q = 0; q < (1 << m); q++) begin
      d = digit_of(m, pat, q);
      if (d < m) s[q] = x[d];
    end
    return s;
  endfunction

  function automatic int ones(int m, bundle_t s);
    int c;
    c = 0;
    for (int q = 0; q < (1 << m); q++) if (s[q]) c++;
    return c;
  endfunction

  function automatic int kc(int m, int num, int den);   // nearest m-bit constant
    int v;
    v = (num * (1 << m) * 2 + den) / (2 * den);
    if (v > (1 << m) - 1) v = (1 << m) - 1;
    return v;
  endfunction

  // Coefficient bit at position q (coefficients use the third pattern).
  function automatic logic cb(int m, int num, int den, int q);
    bundle_t s;
    s = gen(m, kc(m, num, den), 2);
    return s[q];
  endfunction

  // Reference result of one SC operation.
  function automatic bundle_t op_model(int m, sc_op_e op, bundle_t a, bundle_t b);
    bundle_t r;
    logic x, y, x2, t;
    bundle_t h2;
    h2 = gen(m, 1 << (m - 1), H2PAT);
    r = '0;
    for (int q = 0; q < (1 << m); q++) begin
      x = a[q];
      y = b[q];
      x2 = x && y;
      case (op)
        OP_MUL, OP_MIN:        r[q] = x && y;
        OP_MAX, OP_ADD_APPROX: r[q] = x || y;
        OP_NEG:                r[q] = !x;
        OP_SCALED_ADD:         r[q] = ((((q >> (m - 1)) ^ q) & 1) != 0) ? y : x;   // select: top XOR bottom position bit
        OP_ABS_SUB:            r[q] = x != y;
        OP_SIN: begin
          t = !(x2 && cb(m, 1, 42, q));
          t = !(x2 && cb(m, 1, 20, q) && t);
          t = !(x2 && cb(m, 1, 6, q) && t);
          r[q] = x && t;
        end
        OP_COS: begin
          t = !(x2 && cb(m, 1, 56, q));
          t = !(x2 && cb(m, 1, 30, q) && t);
          t = !(x2 && cb(m, 1, 12, q) && t);
          r[q] = !(x2 && cb(m, 1, 2, q) && t);
        end
        OP_TANH: begin
          t = !(x2 && cb(m, 17, 42, q));
          t = !(x2 && cb(m, 2, 5, q) && t);
          t = !(x2 && cb(m, 1, 3, q) && t);
          r[q] = x && t;
        end
        OP_ATAN: begin
          t = !(x2 && cb(m, 5, 7, q));
          t = !(x2 && cb(m, 3, 5, q) && t);
          t = !(x2 && cb(m, 1, 3, q) && t);
          r[q] = x && t;
        end
        OP_SINC: begin
          t = !(x2 && cb(m, 1, 42, q));
          t = !(x2 && cb(m, 1, 20, q) && t);
          r[q] = !(x2 && cb(m, 1, 6, q) && t);
        end
        OP_SIGMOID: begin
          t = !(x2 && cb(m, 1, 10, q));
          t = !(x2 && cb(m, 1, 12, q) && t);
          t = !(x && cb(m, 1, 2, q) && t);
          r[q] = !(h2[q] && t);
        end
        OP_EXPN: begin
          t = !(y && cb(m, 1, 5, q));
          t = !(x && cb(m, 1, 4, q) && t);
          t = !(y && cb(m, 1, 3, q) && t);
          t = !(x && cb(m, 1, 2, q) && t);
          r[q] = !(y && t);
        end
        OP_LN1P: begin
          t = !(x && cb(m, 4, 5, q));
          t = !(y && cb(m, 3, 4, q) && t);
          t = !(x && cb(m, 2, 3, q) && t);
          t = !(y && cb(m, 1, 2, q) && t);
          r[q] = x && t;
        end
        default: r[q] = 1'b0;
      endcase
    end
    return r;
  endfunction

  // Latency in ticks taken from the measured delays (cycles x 2).
  function automatic int lat_ticks(sc_op_e op);
    case (op)
      OP_MUL, OP_MIN, OP_MAX, OP_ADD_APPROX, OP_NEG: return 2;
      OP_SCALED_ADD, OP_ABS_SUB:                     return 4;
      OP_SINC:                                       return 5;
      default:                                       return 6;
    endcase
  endfunction

  // Real-valued function that a transcendental op approximates.
  function automatic real f_ref(sc_op_e op, real x);
    case (op)
      OP_SIN:     return $sin(x);
      OP_COS:     return $cos(x);
      OP_TANH:    return ($exp(x) - $exp(-x)) / ($exp(x) + $exp(-x));
      OP_ATAN:    return $atan(x);
      OP_SINC:    return (x == 0.0) ? 1.0 : $sin(x) / x;
      OP_SIGMOID: return 1.0 / (1.0 + $exp(-x));
      OP_EXPN:    return $exp(-x);
      OP_LN1P:    return $ln(1.0 + x);
      default:    return 0.0;
    endcase
  endfunction
endpackage
