// tb_pimsc_top: end-to-end testbench of the whole engine at its default size
// (M = 6, N = 64-bit bundles, 64 rows).
//
// 1. Memory mode: fills all rows with random words and reads them back.
// 2. Computation mode: runs every SC operation on rows of the array with
//    write-back, checks the result bundle against the reference model, the
//    word written to the destination row (read back in memory mode) against
//    the bundle's count, and the command time against the expected schedule.
// 3. Bundle-only operations (no conversion) must leave the array untouched;
//    chained operations feed the previous result bundle back as operand A.
// 4. NOT of 0 gives 64 ones: the converter overflows and all ones is stored.
// It counts how often each mechanism happened (write, read, compute with and
// without write-back, reuse, overflow, CiM/Mem switches, each operation) and
// counts a failure for any that never did.
module tb_pimsc_top;
  import pimsc_pkg::*;
  import tb_sc_model_pkg::*;

  localparam int M = 6;
  localparam int N = 64;
  localparam int ROWS = 64;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, cmd_reuse = 0, cmd_to_binary = 0, rsp_valid;
  cmd_kind_e cmd_kind = CMD_MEM_WRITE;
  sc_op_e cmd_op = OP_MUL;
  logic [5:0] cmd_addr_a = '0, cmd_addr_b = '0, cmd_addr_d = '0, cmd_wdata = '0;
  bs_pat_e cmd_pat_a = PAT_1, cmd_pat_b = PAT_2;
  logic [M-1:0] rdata, result_bin;
  logic [N-1:0] result_stream;
  logic result_ovf, cim_mode;

  pimsc_top dut (.*);

  logic [M-1:0] mem [ROWS];
  int n_write, n_read, n_comp_wb, n_comp_bundle, n_reuse, n_ovf, n_switch;
  int n_op [15];
  logic last_cim = 0;

  always @(posedge clk) begin
    if (cim_mode != last_cim) n_switch++;
    last_cim <= cim_mode;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Issue one command and return the ticks from acceptance to rsp_valid.
  task automatic issue(cmd_kind_e k, sc_op_e op, int a, int b, int d, int pa, int pb,
                       logic to_bin, logic ru, int wd, output int ticks);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_kind = k; cmd_op = op; cmd_addr_a = 6'(a); cmd_addr_b = 6'(b);
    cmd_addr_d = 6'(d); cmd_pat_a = bs_pat_e'(pa); cmd_pat_b = bs_pat_e'(pb);
    cmd_to_binary = to_bin; cmd_reuse = ru; cmd_wdata = 6'(wd);
    @(negedge clk);
    cmd_valid = 0;
    ticks = 1;
    while (!rsp_valid && ticks < 1000) begin @(negedge clk); ticks++; end
  endtask

  task automatic mem_write(int row, int val);
    int t;
    issue(CMD_MEM_WRITE, OP_MUL, 0, 0, row, 0, 0, 0, 0, val, t);
    mem[row] = 6'(val);
    n_write++;
    checks++;
    if (t != 4) begin failures++; $display("MEM_WRITE took %0d ticks", t); end
  endtask

  task automatic mem_read_check(int row);
    int t;
    issue(CMD_MEM_READ, OP_MUL, row, 0, 0, 0, 0, 0, 0, 0, t);
    @(negedge clk);
    n_read++;
    checks++;
    if (rdata !== mem[row]) begin failures++; $display("row %0d reads %0d, expected %0d", row, rdata, mem[row]); end
    checks++;
    if (t != 4) begin failures++; $display("MEM_READ took %0d ticks", t); end
  endtask

  // Expected command time: accept, read cycle (2), SCU start (1), SCU latency,
  // then for conversion: converter start (1), 3*M*M, write-back cycle (2).
  function automatic int compute_ticks(sc_op_e op, logic to_bin);
    return 3 + 1 + lat_ticks(op) + (to_bin ? (1 + 3 * M * M + 2) : 0);
  endfunction

  bundle_t prev;

  task automatic compute(sc_op_e op, int a, int b, int d, int pa, int pb, logic to_bin, logic ru);
    bundle_t ea, eb, er;
    int t, c, w;
    ea = ru ? prev : gen(M, mem[a], pa);
    eb = gen(M, mem[b], pb);
    er = op_model(M, op, ea, eb);
    issue(CMD_COMPUTE, op, a, b, d, pa, pb, to_bin, ru, 0, t);
    n_op[op]++;
    if (ru) n_reuse++;
    checks++;
    if (result_stream !== er[N-1:0]) begin
      failures++; $display("%s rows %0d,%0d: bundle %h expected %h", op.name(), a, b, result_stream, er[N-1:0]);
    end
    checks++;
    if (t != compute_ticks(op, to_bin)) begin
      failures++; $display("%s: %0d ticks, expected %0d", op.name(), t, compute_ticks(op, to_bin));
    end
    prev = er;
    if (to_bin) begin
      n_comp_wb++;
      c = ones(M, er);
      w = (c >= N) ? N - 1 : c;
      if (c >= N) n_ovf++;
      checks++;
      if (result_ovf !== (c >= N) || (c < N && result_bin !== 6'(c))) begin
        failures++; $display("%s: converter %0d/%b, count %0d", op.name(), result_bin, result_ovf, c);
      end
      mem[d] = 6'(w);
      mem_read_check(d);
    end else begin
      n_comp_bundle++;
    end
  endtask

  initial begin
    int r0, r1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) mem_write(r, $urandom_range(0, 63));
    for (int r = 0; r < ROWS; r++) mem_read_check(r);
    // every operation with write-back
    for (int rep = 0; rep < 4; rep++)
      for (int o = 0; o <= 14; o++) begin
        sc_op_e op;
        logic corr;
        op = sc_op_e'(o);
        corr = (op == OP_MIN || op == OP_MAX || op == OP_ABS_SUB);
        r0 = $urandom_range(0, 63);
        r1 = (o >= 7) ? r0 : $urandom_range(0, 63);
        compute(op, r0, r1, $urandom_range(0, 63), 0, corr ? 0 : 1, 1'b1, 1'b0);
      end
    // bundle-only chain: x*y, then (x*y)*z, then 1-(...), array untouched
    compute(OP_MUL, 1, 2, 0, 0, 1, 1'b0, 1'b0);
    compute(OP_MUL, 0, 3, 0, 0, 1, 1'b0, 1'b1);
    compute(OP_NEG, 0, 0, 0, 0, 1, 1'b0, 1'b1);
    compute(OP_SCALED_ADD, 0, 5, 9, 0, 1, 1'b1, 1'b1);    // chained result written back
    for (int r = 0; r < 8; r++) mem_read_check(r);
    // overflow: NOT of a zero row is 64 ones
    mem_write(10, 0);
    compute(OP_NEG, 10, 10, 11, 0, 1, 1'b1, 1'b0);
    // mechanisms that must have happened
    checks++; if (n_write == 0)       begin failures++; $display("no memory write"); end
    checks++; if (n_read == 0)        begin failures++; $display("no memory read"); end
    checks++; if (n_comp_wb == 0)     begin failures++; $display("no compute with write-back"); end
    checks++; if (n_comp_bundle == 0) begin failures++; $display("no bundle-only compute"); end
    checks++; if (n_reuse == 0)       begin failures++; $display("no bundle reuse"); end
    checks++; if (n_ovf == 0)         begin failures++; $display("no converter overflow"); end
    checks++; if (n_switch < 2)       begin failures++; $display("no CiM/Mem mode switch"); end
    for (int o = 0; o <= 14; o++) begin
      checks++; if (n_op[o] == 0) begin failures++; $display("op %0d never ran", o); end
    end
    $display("writes %0d reads %0d compute+wb %0d bundle-only %0d reuse %0d overflow %0d mode switches %0d",
             n_write, n_read, n_comp_wb, n_comp_bundle, n_reuse, n_ovf, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
