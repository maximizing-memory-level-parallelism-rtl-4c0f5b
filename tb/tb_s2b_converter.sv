// tb_s2b_converter: self-checking testbench of the bundle-to-binary converter.
//
// Runs a 64-bit (M = 6) and an 8-bit (M = 3) converter on all-zero, all-one,
// single-one and random bundles and checks the count (modulo 2^M), the
// overflow flag (set only for N ones) and the conversion time: 3*M*M ticks,
// i.e. 4.5 memory cycles per step for the 8-bit case and 54 cycles at M = 6.
module tb_s2b_converter;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic        st6 = 0, st3 = 0;
  logic [63:0] in6 = '0;
  logic [7:0]  in3 = '0;
  logic [5:0]  q6;
  logic [2:0]  q3;
  logic        ovf6, ovf3, done6, done3, busy6, busy3;

  s2b_converter #(.M(6)) dut6 (.clk, .rst_n, .start(st6), .stream_in(in6), .q(q6), .ovf(ovf6), .done(done6), .busy(busy6));
  s2b_converter #(.M(3)) dut3 (.clk, .rst_n, .start(st3), .stream_in(in3), .q(q3), .ovf(ovf3), .done(done3), .busy(busy3));

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic conv6(logic [63:0] v);
    int t, c;
    c = $countones(v);
    @(negedge clk); in6 = v; st6 = 1;
    @(negedge clk); st6 = 0; t = 1;
    while (!done6 && t < 500) begin @(negedge clk); t++; end
    checks++; if (t != 108) begin failures++; $display("M=6 latency %0d", t); end
    checks++; if (q6 != 6'(c) || ovf6 != (c == 64)) begin failures++; $display("M=6 %h: q=%0d ovf=%0d", v, q6, ovf6); end
  endtask

  task automatic conv3(logic [7:0] v);
    int t, c;
    c = $countones(v);
    @(negedge clk); in3 = v; st3 = 1;
    @(negedge clk); st3 = 0; t = 1;
    while (!done3 && t < 500) begin @(negedge clk); t++; end
    checks++; if (t != 27) begin failures++; $display("M=3 latency %0d", t); end
    checks++; if (q3 != 3'(c) || ovf3 != (c == 8)) begin failures++; $display("M=3 %b: q=%0d ovf=%0d", v, q3, ovf3); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    conv6('0);
    conv6('1);
    for (int i = 0; i < 64; i++) conv6(64'd1 << i);
    for (int i = 0; i < 60; i++) conv6({$urandom, $urandom} & {$urandom, $urandom} | (i[0] ? {$urandom, $urandom} : 64'd0));
    for (int v = 0; v < 256; v++) conv3(8'(v));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
