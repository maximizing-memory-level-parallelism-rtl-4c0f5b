// s2b_converter: parallel stochastic-bundle to binary converter.
//
// Counts the ones of an N = 2^M bit bundle with XOR and AND operations only,
// in M steps. Step k reduces its N inputs with a binary tree: at every tree
// node the XOR of the two children goes up the tree and their AND is kept as a
// carry. The root XOR is the parity of the inputs, i.e. output bit Q[k]; the
// N-1 carries (N/2 from the first tree level, N/4 from the next, ...) each
// stand for a pair of ones, so the next step takes them, plus one input tied
// to 0, as its N inputs. After M steps Q = (Q[M-1] ... Q[0]) is the count
// modulo 2^M. The carries of the last step are ORed into ovf, which is high
// exactly when the bundle held N ones (count = 2^M); that flag is this design's
// addition, the published scheme stops at M output bits.
//
// Each XOR is formed in the LIM array as NOR(NOR(A,B), AND(A,B)): NOR and AND
// of a pair in one memory cycle (2 ticks), the second NOR in half a cycle
// (1 tick), i.e. 1.5 cycles per XOR with the AND coming free in the same step.
// The tree levels are processed one after the other, all nodes of a level in
// parallel, so a step takes 3*M ticks and a conversion 3*M*M ticks
// (M = 3: 4.5 cycles per step and 13.5 cycles in all, M = 6: 54 cycles).
// The published figure of 4.5 cycles per step (4.5*log2 N in all) is for the
// 3-level tree of N = 8; for larger N this design follows the tree, whose
// depth grows with M.
//
// Interface: start samples stream_in; done pulses for one tick 3*M*M ticks
// later, and q / ovf hold the result until the next start.
module s2b_converter #(
  parameter int unsigned M = 6,
  parameter int unsigned N = 1 << M
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] stream_in,
  output logic [M-1:0] q,
  output logic         ovf,
  output logic         done,
  output logic         busy
);
  localparam int unsigned H  = N / 2;
  localparam int unsigned MW = $clog2(M + 1);
  localparam int unsigned QW = (M > 1) ? $clog2(M) : 1;   // index of q

  logic [N-1:0]   v;        // values entering the current tree level
  logic [N-2:0]   carry;    // carries collected in the current step
  logic [H-1:0]   nor_r;    // first NOR of each pair
  logic [H-1:0]   and_r;    // AND of each pair
  logic [1:0]     ph;       // tick within a level: 0 prepare, 1 NOR/AND, 2 final NOR
  logic [MW-1:0]  lv;       // tree level within the step
  logic [MW-1:0]  st;       // step = output bit being produced

  // XOR of each pair as the final NOR.
  logic [H-1:0] xor_c;
  assign xor_c = ~(nor_r | and_r);

  // Width of the current level and first carry slot it fills.
  int unsigned pairs, base;
  always_comb begin
    pairs = H >> lv;
    base  = N - (N >> lv);
  end

  // Carries once the current level's ANDs are added.
  logic [N-2:0] carry_next;
  always_comb begin
    carry_next = carry;
    for (int unsigned j = 0; j < H; j++)
      if (j < pairs) carry_next[base + j] = and_r[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v     <= '0;
      carry <= '0;
      nor_r <= '0;
      and_r <= '0;
      ph    <= '0;
      lv    <= '0;
      st    <= '0;
      q     <= '0;
      ovf   <= 1'b0;
      done  <= 1'b0;
      busy  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          v     <= stream_in;
          carry <= '0;
          q     <= '0;
          ovf   <= 1'b0;
          ph    <= 2'd1;     // the start tick is the first preparation tick
          lv    <= '0;
          st    <= '0;
          busy  <= 1'b1;
        end
      end else begin
        case (ph)
          2'd0: ph <= 2'd1;
          2'd1: begin
            for (int unsigned j = 0; j < H; j++) begin
              nor_r[j] <= ~(v[2*j] | v[2*j+1]);
              and_r[j] <=   v[2*j] & v[2*j+1];
            end
            ph <= 2'd2;
          end
          default: begin
            ph <= 2'd0;
            if (lv == MW'(M - 1)) begin
              // Root reached: parity is this step's output bit.
              q[QW'(st)] <= xor_c[0];
              lv    <= '0;
              carry <= '0;
              v     <= {1'b0, carry_next};
              if (st == MW'(M - 1)) begin
                ovf  <= |carry_next;
                busy <= 1'b0;
                done <= 1'b1;
              end else begin
                st <= st + 1'b1;
              end
            end else begin
              v     <= N'(xor_c);
              carry <= carry_next;
              lv    <= lv + 1'b1;
            end
          end
        endcase
      end
    end
  end
endmodule
