// tb_io_register: self-checking testbench of the 6-bit I/O register.
// Reset clears it; it loads d only on ticks with load and holds otherwise.
module tb_io_register;
  logic clk = 0, rst_n = 0, load = 0;
  logic [5:0] d = '0, q, held;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  io_register #(.M(6)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    checks++; if (q !== '0) begin failures++; $display("not reset"); end
    rst_n = 1;
    held = '0;
    for (int i = 0; i < 100; i++) begin
      d = 6'($urandom); load = $urandom % 2;
      @(negedge clk);
      if (load) held = d;
      checks++;
      if (q !== held) begin failures++; $display("step %0d: %h expected %h", i, q, held); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
