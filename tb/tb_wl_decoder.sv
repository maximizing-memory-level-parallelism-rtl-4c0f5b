// tb_wl_decoder: self-checking testbench of the row decoder (64 rows).
// Every address with each enable combination: exactly the addressed WWL/RWL
// is high when enabled, none otherwise.
module tb_wl_decoder;
  logic [5:0] addr = '0;
  logic wwl_en = 0, rwl_en = 0;
  logic [63:0] wwl, rwl;
  int checks = 0, failures = 0;

  wl_decoder #(.ROWS(64)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 64; r++)
      for (int e = 0; e < 4; e++) begin
        addr = 6'(r); wwl_en = e[0]; rwl_en = e[1]; #1;
        checks++;
        if (wwl !== (e[0] ? 64'd1 << r : 64'd0) || rwl !== (e[1] ? 64'd1 << r : 64'd0)) begin
          failures++;
          $display("addr %0d en %0d: wwl %h rwl %h", r, e, wwl, rwl);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
