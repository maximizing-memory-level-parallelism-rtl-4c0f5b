// tb_mtj_array: self-checking testbench of the MTJ array (64 rows x 6 bits).
// Writes a distinct word into every row, then reads all row pairs back through
// both buses (two rows per access), and checks that a write to one row leaves
// the others alone and that an idle bus reads 0.
module tb_mtj_array;
  logic clk = 0;
  logic [63:0] wwl = '0, rwl1 = '0, rwl2 = '0;
  logic [5:0] wdata = '0, bus1, bus2;
  logic [5:0] ref_mem [64];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mtj_array #(.ROWS(64), .M(6)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 64; r++) begin
      ref_mem[r] = 6'($urandom);
      @(negedge clk); wwl = 64'd1 << r; wdata = ref_mem[r];
    end
    @(negedge clk); wwl = '0; wdata = 6'h3f;
    repeat (2) @(negedge clk);
    for (int r = 0; r < 64; r++) begin
      rwl1 = 64'd1 << r; rwl2 = 64'd1 << (63 - r); #1;
      checks++;
      if (bus1 !== ref_mem[r] || bus2 !== ref_mem[63 - r]) begin
        failures++;
        $display("row %0d: bus1 %h bus2 %h", r, bus1, bus2);
      end
    end
    rwl1 = '0; rwl2 = '0; #1;
    checks++; if (bus1 !== '0 || bus2 !== '0) begin failures++; $display("idle bus not 0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
