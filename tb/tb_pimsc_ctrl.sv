// tb_pimsc_ctrl: self-checking testbench of the command sequencer.
//
// Issues every command kind (and COMPUTE with and without conversion and with
// operand reuse) with random addresses, answers scu_start / s2b_start with a
// done pulse after a random delay, and checks per command: which wordlines,
// sense enables and loads were asserted, for how many ticks, on which row, in
// which mode (cim), that the SCU and the converter were started exactly when
// required, and that rsp_valid closes the command.
module tb_pimsc_ctrl;
  import pimsc_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, cmd_reuse = 0, cmd_to_binary = 0, rsp_valid;
  cmd_kind_e cmd_kind = CMD_MEM_WRITE;
  sc_op_e cmd_op = OP_MUL;
  logic [5:0] cmd_addr_a = '0, cmd_addr_b = '0, cmd_addr_d = '0;
  bs_pat_e cmd_pat_a = PAT_1, cmd_pat_b = PAT_2;
  logic cim, dec1_wwl_en, dec1_rwl_en, dec2_rwl_en, sa1_en, sa2_en, in_load, out_load, reuse;
  logic [5:0] dec1_addr, dec2_addr;
  bs_pat_e pat_a, pat_b;
  logic scu_start, scu_done = 0, s2b_start, s2b_done = 0;
  sc_op_e scu_op;

  pimsc_ctrl #(.ROWS(64)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Responders for the two units.
  initial forever begin
    @(posedge clk);
    if (scu_start) begin
      repeat ($urandom_range(1, 5)) @(posedge clk);
      #1 scu_done = 1; @(posedge clk); #1 scu_done = 0;
    end
  end
  initial forever begin
    @(posedge clk);
    if (s2b_start) begin
      repeat ($urandom_range(1, 20)) @(posedge clk);
      #1 s2b_done = 1; @(posedge clk); #1 s2b_done = 0;
    end
  end

  // Per-command tallies, sampled at every rising edge.
  int n_wwl, n_rwl1, n_rwl2, n_sa1, n_sa2, n_in, n_out, n_scu, n_s2b, n_cim, n_bad_addr;
  logic [5:0] ea, eb, ed;
  always @(posedge clk) if (rst_n) begin
    if (dec1_wwl_en) begin n_wwl++;  if (dec1_addr != ed) n_bad_addr++; end
    if (dec1_rwl_en) begin n_rwl1++; if (dec1_addr != ea) n_bad_addr++; end
    if (dec2_rwl_en) begin
      n_rwl2++;
      if (dec2_addr != ((cmd_kind_r == CMD_MEM_READ) ? ea : eb)) n_bad_addr++;
    end
    if (sa1_en) n_sa1++;
    if (sa2_en) n_sa2++;
    if (in_load) n_in++;
    if (out_load) n_out++;
    if (scu_start) begin n_scu++; if (scu_op != op_r) n_bad_addr++; end
    if (s2b_start) n_s2b++;
    if (cim) n_cim++;
  end

  cmd_kind_e cmd_kind_r;
  sc_op_e op_r;

  task automatic issue(cmd_kind_e k, logic to_bin, logic ru);
    int t;
    n_wwl = 0; n_rwl1 = 0; n_rwl2 = 0; n_sa1 = 0; n_sa2 = 0; n_in = 0; n_out = 0;
    n_scu = 0; n_s2b = 0; n_cim = 0; n_bad_addr = 0;
    ea = 6'($urandom); eb = 6'($urandom); ed = 6'($urandom);
    op_r = sc_op_e'($urandom_range(0, 14));
    cmd_kind_r = k;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_kind = k; cmd_op = op_r; cmd_addr_a = ea; cmd_addr_b = eb; cmd_addr_d = ed;
    cmd_to_binary = to_bin; cmd_reuse = ru; cmd_pat_a = PAT_3; cmd_pat_b = PAT_1;
    @(negedge clk);
    cmd_valid = 0; cmd_kind = CMD_MEM_READ; cmd_addr_a = '0; cmd_addr_b = '0; cmd_addr_d = '0;
    t = 0;
    while (!rsp_valid && t < 200) begin @(negedge clk); t++; end
    checks++;
    if (!rsp_valid) begin failures++; $display("%s: no response", k.name()); end
    @(negedge clk);
    checks++;
    if (n_bad_addr != 0) begin failures++; $display("%s: wrong row or op on %0d ticks", k.name(), n_bad_addr); end
    checks++;
    case (k)
      CMD_MEM_WRITE:
        if (n_wwl != 2 || n_rwl1 || n_rwl2 || n_in != 1 || n_out || n_scu || n_s2b || n_cim) begin
          failures++; $display("MEM_WRITE sequence wrong: wwl %0d in %0d cim %0d", n_wwl, n_in, n_cim);
        end
      CMD_MEM_READ:
        if (n_wwl || n_rwl1 || n_rwl2 != 2 || n_sa2 != 1 || n_sa1 || n_out != 1 || n_scu || n_s2b || n_cim) begin
          failures++; $display("MEM_READ sequence wrong: rwl2 %0d sa2 %0d out %0d", n_rwl2, n_sa2, n_out);
        end
      default:
        if (n_rwl1 != 2 || n_rwl2 != 2 || n_sa1 != 1 || n_sa2 != 1 || n_scu != 1 ||
            n_s2b != (to_bin ? 1 : 0) || n_wwl != (to_bin ? 2 : 0) || n_cim == 0 || n_in || n_out) begin
          failures++;
          $display("COMPUTE sequence wrong: rwl %0d/%0d sa %0d/%0d scu %0d s2b %0d wwl %0d cim %0d",
                   n_rwl1, n_rwl2, n_sa1, n_sa2, n_scu, n_s2b, n_wwl, n_cim);
        end
    endcase
    checks++;
    if (k == CMD_COMPUTE && (reuse !== ru || pat_a !== PAT_3 || pat_b !== PAT_1)) begin
      failures++; $display("COMPUTE: reuse/pattern not held");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      issue(CMD_MEM_WRITE, 0, 0);
      issue(CMD_MEM_READ, 0, 0);
      issue(CMD_COMPUTE, 1, 0);
      issue(CMD_COMPUTE, 0, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
