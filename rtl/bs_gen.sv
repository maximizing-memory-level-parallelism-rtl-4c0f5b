// bs_gen: deterministic in-memory bit-stream generator.
//
// Converts an M-bit binary value x = (x[M-1] ... x[0]) into an N = 2^M bit
// stochastic bundle whose number of ones equals x. Bit x[i] is replicated
// 2^i times at fixed positions and one position is tied to 0, so the bundle
// encodes x / N. In the array this is done by writing the sensed bits into
// cells of a row and reading the row back; here it is the fixed position map
// it realises. The output is combinational in x and pat.
//
// Position map (stream[q], q = 0 .. N-1), with ruler(q) = M-1-tz(q+1) for
// q < N-1 and "tied to 0" for q = N-1 (tz = number of trailing zeros):
//   PAT_1: ruler(q)
//   PAT_2: ruler(bitreverse(q))
//   PAT_3: ruler(q rotated left by M/2 bits)
// Choosing the same pattern for two operands gives correlated bundles (needed
// by min/max), different patterns give independent ones (needed by multiply).
//
// For M = 3 the three patterns are exactly the ones published for the design
// (top to bottom: PAT_1 = x2 x1 x2 x0 x2 x1 x2 0, PAT_2 = x2 x1 x0 x2 x2 0 x1 x2,
// PAT_3 = x2 x1 x0 x2 x1 x2 x2 0; e.g. x = 011 gives 01010100 and 01100010 for
// PAT_1 and PAT_2). PAT_1 above is the natural extension of the first pattern
// to any M; the rules for PAT_2 and PAT_3 at other M are this design's own.
module bs_gen #(
  parameter int unsigned M = 6,
  parameter int unsigned N = 1 << M
) (
  input  logic [M-1:0]        x,
  input  pimsc_pkg::bs_pat_e  pat,
  output logic [N-1:0]        stream
);
  import pimsc_pkg::*;

  // Index of the source bit of position q under the ruler pattern; M = tied to 0.
  function automatic int unsigned ruler(int unsigned q);
    int unsigned p, t;
    if (q == N - 1) return M;
    p = q + 1;
    t = 0;
    for (int unsigned i = 0; i < M; i++)
      if (((p >> i) & 1) == 0 && t == i) t = i + 1;
    return M - 1 - t;
  endfunction

  function automatic int unsigned bitrev(int unsigned q);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < M; i++)
      if (((q >> i) & 1) != 0) r |= 1 << (M - 1 - i);
    return r;
  endfunction

  // Position index rotated left by M/2 bits.
  function automatic int unsigned rotl(int unsigned q);
    return ((q << (M / 2)) | (q >> (M - M / 2))) & (N - 1);
  endfunction

  function automatic int unsigned src_index(bs_pat_e p, int unsigned q);
    // Published 3-bit patterns (3 = tied to 0).
    int unsigned fig_p2 [8];
    int unsigned fig_p3 [8];
    fig_p2 = '{2, 1, 0, 2, 2, 3, 1, 2};
    fig_p3 = '{2, 1, 0, 2, 1, 2, 2, 3};
    case (p)
      PAT_2:   return (M == 3) ? fig_p2[q] : ruler(bitrev(q));
      PAT_3:   return (M == 3) ? fig_p3[q] : ruler(rotl(q));
      default: return ruler(q);
    endcase
  endfunction

  always_comb begin
    stream = '0;
    for (int unsigned q = 0; q < N; q++) begin
      int unsigned s;
      s = src_index(pat, q);
      if (s < M) stream[q] = x[s];
    end
  end
endmodule
