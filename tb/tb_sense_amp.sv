// tb_sense_amp: self-checking testbench of the 6-bit sense amplifier.
// The output follows the bus only on ticks with sense_en and holds otherwise.
module tb_sense_amp;
  logic clk = 0, rst_n = 0, sense_en = 0;
  logic [5:0] bus = '0, dout, held;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sense_amp #(.M(6)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    checks++; if (dout !== '0) begin failures++; $display("not reset"); end
    rst_n = 1;
    held = '0;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk);
      bus = 6'($urandom); sense_en = $urandom % 2;
      @(negedge clk);
      if (sense_en) held = bus;
      sense_en = 0;
      checks++;
      if (dout !== held) begin failures++; $display("step %0d: %h expected %h", i, dout, held); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
