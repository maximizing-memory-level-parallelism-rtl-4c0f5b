// pimsc_top: parallel in-memory stochastic computing engine.
//
// An MTJ memory array whose rows hold M-bit binary words, extended so that it
// can also compute on them with stochastic bit-streams, all inside the memory:
//
//   row addr_a --decoder 1--> bus1 --SA1--> bs_gen (pat_a) --\
//                                                             SCU (N lanes) --> s2b_converter --\
//   row addr_b --decoder 2--> bus2 --SA2--> bs_gen (pat_b) --/       |                          |
//                                  |                          result_stream        (saturate)   |
//                                  +--> output register --> rdata                               |
//   wdata --> input register --> input MUX (CiM/Mem) <------------------------------------------/
//                                      |
//                                      +--> array write port (row addr_d, decoder 1)
//
// In memory mode (cim = 0) the array is a plain memory: MEM_WRITE stores
// cmd_wdata, MEM_READ returns a row in rdata. In computation mode (cim = 1) a
// COMPUTE command reads two rows, expands both words into N = 2^M bit bundles,
// evaluates one SC operation on all N bits in parallel, and, if asked,
// converts the result back to an M-bit word and writes it to row addr_d. The
// result bundle is always visible on result_stream and can be fed back as the
// first operand of the next COMPUTE (cmd_reuse).
//
// Timing, in ticks of clk (two ticks per memory cycle), counted from the edge
// that accepts the command to the edge after which rsp_valid is high:
// MEM_WRITE and MEM_READ 4 ticks; COMPUTE 4 + L ticks, L being the SCU latency
// (2..6 ticks); COMPUTE with conversion 7 + L + 3*M*M ticks (M = 6: 113..121,
// i.e. about 57..61 memory cycles, of which 54 are the converter).
//
// The assertions use rst_n in their disable condition as well as the flops
// use it as an asynchronous reset; a lint note about that mixed use is
// expected and harmless.
//
// Pixel-level parallelism: with P > 1 a row holds P words side by side (a row
// of P*M cells), the SAs and registers are P*M bits wide, and there are P
// generator pairs, SCUs and converters, so one command processes P operand
// pairs at once with the same timing. A design with C columns of bundle cells
// holds P = floor(C / N) words per row (e.g. 1024 columns at N = 256 give 4).
// P = 1 is the single-operation configuration the latencies are quoted for.
//
// The block structure (decoders, SAs, generators, SCU, converter, input MUX,
// input and output registers, CiM/Mem switch) follows the published block
// diagram; the command interface, the number of rows and the saturation of an
// overflowing count to all ones are this design's choices.
module pimsc_top #(
  parameter int unsigned M    = 6,
  parameter int unsigned N    = 1 << M,
  parameter int unsigned ROWS = 64,
  parameter int unsigned P    = 1,      // words (pixels) side by side in a row
  parameter int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  pimsc_pkg::cmd_kind_e  cmd_kind,
  input  pimsc_pkg::sc_op_e     cmd_op,
  input  logic [AW-1:0]         cmd_addr_a,
  input  logic [AW-1:0]         cmd_addr_b,
  input  logic [AW-1:0]         cmd_addr_d,
  input  pimsc_pkg::bs_pat_e    cmd_pat_a,
  input  pimsc_pkg::bs_pat_e    cmd_pat_b,
  input  logic                  cmd_reuse,
  input  logic                  cmd_to_binary,
  input  logic [P*M-1:0]        cmd_wdata,      // word p in bits [p*M +: M]
  output logic                  rsp_valid,
  output logic [P*M-1:0]        rdata,          // output register
  output logic [P*N-1:0]        result_stream,  // SCU result bundles
  output logic [P*M-1:0]        result_bin,     // converter counts (mod 2^M)
  output logic [P-1:0]          result_ovf,     // converter saw N ones
  output logic                  cim_mode        // CiM/Mem control signal
);
  import pimsc_pkg::*;

  // control
  logic          cim, dec1_wwl_en, dec1_rwl_en, dec2_rwl_en;
  logic [AW-1:0] dec1_addr, dec2_addr;
  logic          sa1_en, sa2_en, in_load, out_load, reuse;
  bs_pat_e       pat_a, pat_b;
  logic          scu_start, scu_done, scu_busy, s2b_start, s2b_done, s2b_busy;
  sc_op_e        scu_op;

  // datapath
  logic [ROWS-1:0] wwl1, rwl1, wwl2_unused, rwl2;
  logic [P*M-1:0]  bus1, bus2, sa1_q, sa2_q, in_q, wdata, conv_w;
  logic [P*N-1:0]  bs_a, bs_b, scu_a;
  logic [P-1:0]    scu_done_v, scu_busy_v, s2b_done_v, s2b_busy_v;

  pimsc_ctrl #(.ROWS(ROWS), .AW(AW)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_kind, .cmd_op, .cmd_addr_a, .cmd_addr_b, .cmd_addr_d,
    .cmd_pat_a, .cmd_pat_b, .cmd_reuse, .cmd_to_binary, .rsp_valid,
    .cim, .dec1_addr, .dec1_wwl_en, .dec1_rwl_en, .dec2_addr, .dec2_rwl_en,
    .sa1_en, .sa2_en, .in_load, .out_load, .pat_a, .pat_b, .reuse,
    .scu_start, .scu_op, .scu_done, .s2b_start, .s2b_done
  );

  wl_decoder #(.ROWS(ROWS), .AW(AW)) u_dec1 (
    .addr(dec1_addr), .wwl_en(dec1_wwl_en), .rwl_en(dec1_rwl_en), .wwl(wwl1), .rwl(rwl1)
  );
  wl_decoder #(.ROWS(ROWS), .AW(AW)) u_dec2 (
    .addr(dec2_addr), .wwl_en(1'b0), .rwl_en(dec2_rwl_en), .wwl(wwl2_unused), .rwl(rwl2)
  );

  mtj_array #(.ROWS(ROWS), .M(P*M)) u_array (
    .clk, .wwl(wwl1), .wdata, .rwl1, .rwl2, .bus1, .bus2
  );

  sense_amp #(.M(P*M)) u_sa1 (.clk, .rst_n, .sense_en(sa1_en), .bus(bus1), .dout(sa1_q));
  sense_amp #(.M(P*M)) u_sa2 (.clk, .rst_n, .sense_en(sa2_en), .bus(bus2), .dout(sa2_q));

  io_register #(.M(P*M)) u_in_reg  (.clk, .rst_n, .load(in_load),  .d(cmd_wdata), .q(in_q));
  io_register #(.M(P*M)) u_out_reg (.clk, .rst_n, .load(out_load), .d(sa2_q),     .q(rdata));

  // One generator pair, SCU and converter per word of the row; all lanes run
  // the same operation in lock step under the one controller.
  for (genvar p = 0; p < int'(P); p++) begin : g_lane
    bs_gen #(.M(M), .N(N)) u_gen1 (.x(sa1_q[p*M +: M]), .pat(pat_a), .stream(bs_a[p*N +: N]));
    bs_gen #(.M(M), .N(N)) u_gen2 (.x(sa2_q[p*M +: M]), .pat(pat_b), .stream(bs_b[p*N +: N]));

    assign scu_a[p*N +: N] = reuse ? result_stream[p*N +: N] : bs_a[p*N +: N];

    scu #(.M(M), .N(N)) u_scu (
      .clk, .rst_n, .start(scu_start), .op(scu_op), .a(scu_a[p*N +: N]), .b(bs_b[p*N +: N]),
      .result(result_stream[p*N +: N]), .done(scu_done_v[p]), .busy(scu_busy_v[p])
    );

    s2b_converter #(.M(M), .N(N)) u_s2b (
      .clk, .rst_n, .start(s2b_start), .stream_in(result_stream[p*N +: N]),
      .q(result_bin[p*M +: M]), .ovf(result_ovf[p]), .done(s2b_done_v[p]), .busy(s2b_busy_v[p])
    );

    assign conv_w[p*M +: M] = result_ovf[p] ? '1 : result_bin[p*M +: M];
  end

  // The lanes are identical in timing; the controller waits for all of them.
  assign scu_done = &scu_done_v;
  assign scu_busy = |scu_busy_v;
  assign s2b_done = &s2b_done_v;
  assign s2b_busy = |s2b_busy_v;

  input_mux #(.M(P*M)) u_mux (.cim, .in_reg(in_q), .conv_res(conv_w), .wdata);

  assign cim_mode = cim;

  // The sequencer never starts a unit that is still busy.
  a_scu_idle: assert property (@(posedge clk) disable iff (!rst_n) scu_start |-> !scu_busy);
  a_s2b_idle: assert property (@(posedge clk) disable iff (!rst_n) s2b_start |-> !s2b_busy);
endmodule
