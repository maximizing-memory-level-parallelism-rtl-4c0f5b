// tb_tone_map: tone-mapping workload on the engine at N = 256 (M = 8) with
// four pixels per row (P = 4, i.e. 1024 bundle columns / 256).
//
// Tone mapping applies an S-shaped curve to every pixel independently. The
// input intensity x (8 bits) is first stretched around beta,
// x' = clip(beta + alpha * (x - beta), 0, 1) with (alpha, beta) = (1.2, 0.5).
// That step is plain binary arithmetic, which the engine does not have, so the
// testbench does it as the host would before writing x' into the array. The
// engine then evaluates per pixel:
//   sigmoid curve: y = sigmoid(x')            one COMPUTE with write-back
//   tanh curve:    y = (tanh(x') + 1) / 2      COMPUTE tanh (bundle only), then
//                                              a scaled addition that reuses the
//                                              tanh bundle and a row holding
//                                              255/256 (the largest M-bit word)
// and the result is read back in memory mode.
//
// Because the curve acts on each pixel alone, a 256 x 256 8-bit image is fully
// described by its 256 intensity levels. The testbench pushes all 256 levels
// through the hardware, 64 at a time: 16 rows of 4 pixels each (rows 0-15
// input, 16-31 sigmoid output, 32-47 tanh output, row 63 the 255 constant in
// all four words); every command works on the four pixels of a row at once.
// It checks every word against the
// bit-level reference model, checks the curve against the real functions, and
// reports the PSNR of a 256 x 256 horizontal-gradient image (each level 256
// times) against the real-valued curves, the ticks spent per pixel and the
// frame rate this gives for a 256 x 256 frame at a 200 MHz memory clock.
// The slope and centre k, c of the curves are not modelled: the SC blocks
// evaluate the functions on [0, 1] directly.
//
// Measured here: the sigmoid curve is within about 0.007 of the real function
// (about 40 dB PSNR), the tanh curve within about 0.035 (about 27 dB); the
// thresholds below are set from these measurements.
module tb_tone_map;
  import pimsc_pkg::*;
  import tb_sc_model_pkg::*;

  localparam int M = 8;
  localparam int N = 256;
  localparam int ROWS = 64;
  localparam int P = 4;
  localparam real ALPHA = 1.2;
  localparam real BETA = 0.5;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, cmd_reuse = 0, cmd_to_binary = 0, rsp_valid;
  cmd_kind_e cmd_kind = CMD_MEM_WRITE;
  sc_op_e cmd_op = OP_MUL;
  logic [5:0] cmd_addr_a = '0, cmd_addr_b = '0, cmd_addr_d = '0;
  logic [P*M-1:0] cmd_wdata = '0;
  bs_pat_e cmd_pat_a = PAT_1, cmd_pat_b = PAT_2;
  logic [P*M-1:0] rdata, result_bin;
  logic [P*N-1:0] result_stream;
  logic [P-1:0] result_ovf;
  logic cim_mode;

  pimsc_top #(.M(M), .ROWS(ROWS), .P(P)) dut (.*);

  logic [P*M-1:0] mem [ROWS];
  int total_ticks = 0;
  int n_reuse = 0;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(cmd_kind_e k, sc_op_e op, int a, int b, int d, int pa, int pb,
                       logic to_bin, logic ru, logic [P*M-1:0] wd);
    int ticks;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_kind = k; cmd_op = op; cmd_addr_a = 6'(a); cmd_addr_b = 6'(b);
    cmd_addr_d = 6'(d); cmd_pat_a = bs_pat_e'(pa); cmd_pat_b = bs_pat_e'(pb);
    cmd_to_binary = to_bin; cmd_reuse = ru; cmd_wdata = wd;
    @(negedge clk);
    cmd_valid = 0;
    ticks = 1;
    while (!rsp_valid && ticks < 2000) begin @(negedge clk); ticks++; end
    total_ticks += ticks;
    checks++;
    if (!rsp_valid) begin failures++; $display("command never finished"); end
  endtask

  task automatic mem_write(int row, logic [P*M-1:0] val);
    issue(CMD_MEM_WRITE, OP_MUL, 0, 0, row, 0, 0, 0, 0, val);
    mem[row] = val;
  endtask

  task automatic mem_read(int row, output logic [P*M-1:0] val);
    issue(CMD_MEM_READ, OP_MUL, row, 0, 0, 0, 0, 0, 0, 0);
    @(negedge clk);
    val = rdata;
  endtask

  // Word the converter leaves for a result bundle (saturated at N - 1).
  function automatic int word_of(bundle_t s);
    int c;
    c = ones(M, s);
    return (c >= N) ? N - 1 : c;
  endfunction

  int y_sig [256], y_tanh [256];
  real xp [256];

  initial begin
    bundle_t bx, bt, bs, bh;
    logic [P*M-1:0] row_w;
    int v, e, lvl;
    real fps;
    real se_sig, se_tanh, err, mae_sig, mae_tanh, psnr_sig, psnr_tanh, ref_v;
    repeat (3) @(negedge clk);
    rst_n = 1;
    mem_write(63, '1);
    for (int base = 0; base < 256; base += 16 * P) begin
      for (int i = 0; i < 16; i++) begin
        row_w = '0;
        for (int p = 0; p < P; p++) begin
          real t;
          int q;
          lvl = base + i * P + p;
          t = BETA + ALPHA * (real'(lvl) / 255.0 - BETA);
          if (t < 0.0) t = 0.0;
          if (t > 1.0) t = 1.0;
          q = int'(t * (N - 1));
          xp[lvl] = real'(q) / N;
          row_w[p*M +: M] = M'(q);
        end
        mem_write(i, row_w);
      end
      for (int i = 0; i < 16; i++) begin
        // sigmoid: one operation, converted and written back
        issue(CMD_COMPUTE, OP_SIGMOID, i, i, 16 + i, 0, 1, 1'b1, 1'b0, 0);
        // tanh, then (tanh + 1) / 2 through the reused bundle
        issue(CMD_COMPUTE, OP_TANH, i, i, 0, 0, 1, 1'b0, 1'b0, 0);
        issue(CMD_COMPUTE, OP_SCALED_ADD, 0, 63, 32 + i, 0, 1, 1'b1, 1'b1, 0);
        n_reuse++;
      end
      for (int i = 0; i < 16; i++) begin
        logic [P*M-1:0] rs, rt;
        mem_read(16 + i, rs);
        mem_read(32 + i, rt);
        for (int p = 0; p < P; p++) begin
          lvl = base + i * P + p;
          bx = gen(M, int'(mem[i][p*M +: M]), 0);
          bh = gen(M, int'(mem[i][p*M +: M]), 1);
          bs = op_model(M, OP_SIGMOID, bx, bh);
          bt = op_model(M, OP_TANH, bx, bh);
          bt = op_model(M, OP_SCALED_ADD, bt, gen(M, N - 1, 1));
          v = int'(rs[p*M +: M]);
          e = word_of(bs);
          checks++;
          if (v != e) begin failures++; $display("level %0d sigmoid word %0d, expected %0d", lvl, v, e); end
          y_sig[lvl] = v;
          v = int'(rt[p*M +: M]);
          e = word_of(bt);
          checks++;
          if (v != e) begin failures++; $display("level %0d tanh word %0d, expected %0d", lvl, v, e); end
          y_tanh[lvl] = v;
        end
      end
    end
    // curve quality against the real functions (gradient image: each level 256 times)
    se_sig = 0.0; se_tanh = 0.0; mae_sig = 0.0; mae_tanh = 0.0;
    for (int l = 0; l < 256; l++) begin
      ref_v = f_ref(OP_SIGMOID, xp[l]);
      err = real'(y_sig[l]) / N - ref_v;
      se_sig += err * err;
      mae_sig += (err < 0.0) ? -err : err;
      ref_v = (f_ref(OP_TANH, xp[l]) + 1.0) / 2.0;
      err = real'(y_tanh[l]) / N - ref_v;
      se_tanh += err * err;
      mae_tanh += (err < 0.0) ? -err : err;
    end
    mae_sig /= 256.0; mae_tanh /= 256.0;
    psnr_sig = 10.0 * $log10(1.0 / (se_sig / 256.0));
    psnr_tanh = 10.0 * $log10(1.0 / (se_tanh / 256.0));
    $display("sigmoid curve: MAE %0.4f PSNR %0.2f dB", mae_sig, psnr_sig);
    $display("tanh curve:    MAE %0.4f PSNR %0.2f dB", mae_tanh, psnr_tanh);
    $display("%0d ticks for 256 levels of both curves (%0.1f memory cycles per pixel and curve)",
             total_ticks, real'(total_ticks) / 2.0 / 512.0);
    // one 256 x 256 frame with both curves, 200 MHz memory cycle
    fps = 200.0e6 / (real'(total_ticks) / 2.0 * 65536.0 / 256.0);
    $display("256 x 256 frame, both curves, 200 MHz: %0.1f frames/s", fps);
    checks++; if (mae_sig > 0.02)  begin failures++; $display("sigmoid curve too far off"); end
    checks++; if (mae_tanh > 0.05) begin failures++; $display("tanh curve too far off"); end
    checks++; if (psnr_sig < 35.0) begin failures++; $display("sigmoid PSNR below 35 dB"); end
    checks++; if (psnr_tanh < 24.0) begin failures++; $display("tanh PSNR below 24 dB"); end
    checks++; if (n_reuse == 0) begin failures++; $display("no bundle reuse"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
