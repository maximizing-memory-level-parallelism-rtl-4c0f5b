// tb_input_mux: self-checking testbench of the write-data selector.
// Memory mode passes the input register, computation mode the converter result.
module tb_input_mux;
  logic cim = 0;
  logic [5:0] in_reg = '0, conv_res = '0, wdata;
  int checks = 0, failures = 0;

  input_mux #(.M(6)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      in_reg = 6'($urandom); conv_res = 6'($urandom); cim = i[0]; #1;
      checks++;
      if (wdata !== (cim ? conv_res : in_reg)) begin failures++; $display("cim %b: %h", cim, wdata); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
