// tb_scu: self-checking testbench of the parallel SC unit (M = 6, N = 64).
//
// For every operation and a sweep of operand values it builds the operand
// bundles with the reference model, starts the unit and checks
//  * the result bundle bit for bit against the reference model,
//  * that done arrives exactly the measured number of ticks after start
//    (1 cycle AND/OR, 2 scaled add / abs-sub, 2.5 Sinc, 3 other functions),
//  * for the transcendental functions, that the mean absolute error of the
//    result value against the real function over x = 0 .. 63/64 stays within
//    0.01 of what was measured for this design (measured: sin 0.017, cos 0.020, tanh 0.041, atan 0.046, Sinc 0.010,
//    sigmoid 0.010, exp(-x) 0.040, ln(1+x) 0.111).
module tb_scu;
  import pimsc_pkg::*;
  import tb_sc_model_pkg::*;

  localparam int M = 6;
  localparam int N = 1 << M;

  logic clk = 0, rst_n = 0, start = 0;
  sc_op_e op = OP_MUL;
  logic [N-1:0] a = '0, b = '0, result;
  logic done, busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  scu #(.M(M)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(sc_op_e o, int x, int y, int pa, int pb, output int got);
    bundle_t ea, eb, exp_r;
    int t;
    ea = gen(M, x, pa);
    eb = gen(M, y, pb);
    exp_r = op_model(M, o, ea, eb);
    @(negedge clk);
    op = o; a = ea[N-1:0]; b = eb[N-1:0]; start = 1;
    @(negedge clk);
    start = 0;
    t = 1;
    while (!done && t < 20) begin
      @(negedge clk);
      t++;
    end
    checks++;
    if (t != lat_ticks(o)) begin
      failures++;
      $display("latency %s: %0d ticks, expected %0d", o.name(), t, lat_ticks(o));
    end
    checks++;
    if (result !== exp_r[N-1:0]) begin
      failures++;
      $display("%s x=%0d y=%0d: got %h expected %h", o.name(), x, y, result, exp_r[N-1:0]);
    end
    got = ones(M, {192'b0, result});
  endtask

  initial begin
    int got;
    real err, mae;
    // measured error + 0.01, in op order sin .. ln(1+x)
    real bound [8] = '{0.027, 0.030, 0.051, 0.056, 0.020, 0.020, 0.050, 0.121};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // basic operations on a grid of operands
    for (int o = 0; o <= 6; o++)
      for (int x = 0; x < N; x += 7)
        for (int y = 0; y < N; y += 9)
          run(sc_op_e'(o), x, y, 0, (o == 1 || o == 2 || o == 5) ? 0 : 1, got);
    // Exact values that do not depend on the model. Two bundles made with the
    // same digit-copy pattern put digit i of both operands on the same 2^i
    // positions, so AND / OR / XOR count the bitwise AND / OR / XOR of the
    // binary operands: min/max/|x-y| are exact only when the operands' ones
    // are nested (e.g. 20 = 010100 and 52 = 110100).
    run(OP_MIN, 20, 45, 0, 0, got);
    checks++; if (got != (20 & 45)) begin failures++; $display("AND(20,45) = %0d", got); end
    run(OP_MAX, 20, 45, 0, 0, got);
    checks++; if (got != (20 | 45)) begin failures++; $display("OR(20,45) = %0d", got); end
    run(OP_ABS_SUB, 20, 45, 0, 0, got);
    checks++; if (got != (20 ^ 45)) begin failures++; $display("XOR(20,45) = %0d", got); end
    run(OP_MIN, 20, 52, 0, 0, got);
    checks++; if (got != 20) begin failures++; $display("min(20,52) = %0d", got); end
    run(OP_MAX, 20, 52, 0, 0, got);
    checks++; if (got != 52) begin failures++; $display("max(20,52) = %0d", got); end
    run(OP_ABS_SUB, 20, 52, 0, 0, got);
    checks++; if (got != 32) begin failures++; $display("|20-52| = %0d", got); end
    run(OP_NEG, 20, 0, 0, 1, got);
    checks++; if (got != 44) begin failures++; $display("1-20 = %0d", got); end
    run(OP_MUL, 32, 32, 0, 1, got);                      // 1/2 * 1/2, independent
    checks++; if (got != 16) begin failures++; $display("32*32/64 = %0d", got); end
    // transcendental functions: bit-exact sweep plus accuracy
    for (int o = 7; o <= 14; o++) begin
      sc_op_e fo;
      fo = sc_op_e'(o);
      mae = 0.0;
      for (int x = 0; x < N; x++) begin
        run(sc_op_e'(o), x, x, 0, 1, got);
        err = real'(got) / N - f_ref(sc_op_e'(o), real'(x) / N);
        mae += (err < 0.0) ? -err : err;
      end
      mae = mae / N;
      $display("%s: mean abs error %0.4f", fo.name(), mae);
      checks++;
      if (mae > bound[o - 7]) begin failures++; $display("%s: error too large", fo.name()); end
    end
    // start while busy is ignored
    @(negedge clk);
    op = OP_SIN; a = '1; b = '1; start = 1;
    @(negedge clk);
    op = OP_MUL; a = '0;
    @(negedge clk);
    start = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("unit still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
