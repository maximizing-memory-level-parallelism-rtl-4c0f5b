// tb_lim_cell: self-checking testbench of the two-phase logic-in-memory gate.
//
// For all four operand pairs: preparation programs a and b, evaluation senses
// them; NOR/OR/NAND/AND must appear after the evaluation tick, and must not
// change when the operands change without a new preparation. Then 300 ticks
// of random prep / eval / operand values are compared every tick with a
// reference that keeps its own copy of the two programmed states.
module tb_lim_cell;
  logic clk = 0, rst_n = 0, prep = 0, eval = 0, a = 0, b = 0;
  logic o_nor, o_or, o_nand, o_and;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lim_cell dut (.clk, .rst_n, .prep, .eval, .a, .b,
                .out_nor(o_nor), .out_or(o_or), .out_nand(o_nand), .out_and(o_and));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 4; v++) begin
      logic ea, eb;
      ea = v[1]; eb = v[0];
      @(negedge clk); a = ea; b = eb; prep = 1;
      @(negedge clk); prep = 0; eval = 1; a = ~ea; b = ~eb;   // operands change: must not matter
      @(negedge clk); eval = 0;
      checks++;
      if ({o_nor, o_or, o_nand, o_and} !== {~(ea | eb), ea | eb, ~(ea & eb), ea & eb}) begin
        failures++;
        $display("a=%b b=%b: nor=%b or=%b nand=%b and=%b", ea, eb, o_nor, o_or, o_nand, o_and);
      end
      @(negedge clk); // no eval: outputs hold
      checks++;
      if (o_and !== (ea & eb) || o_or !== (ea | eb)) begin failures++; $display("outputs did not hold"); end
    end
    // random phases against a reference of the programmed and sensed states
    begin
      logic m1, m2, r_nor, r_or, r_nand, r_and;
      m1 = 1'b1; m2 = 1'b1;   // last pair prepared above was (1, 1)
      r_nor = o_nor; r_or = o_or; r_nand = o_nand; r_and = o_and;
      for (int i = 0; i < 300; i++) begin
        logic p, e, na, nb;
        p = 1'($urandom_range(0, 1)); e = 1'($urandom_range(0, 1));
        na = 1'($urandom_range(0, 1)); nb = 1'($urandom_range(0, 1));
        @(negedge clk); prep = p; eval = e; a = na; b = nb;
        @(posedge clk);
        // both phases sample the states as they were before this edge
        if (e) begin r_nor = ~(m1 | m2); r_or = m1 | m2; r_nand = ~(m1 & m2); r_and = m1 & m2; end
        if (p) begin m1 = na; m2 = nb; end
        #1;
        checks++;
        if ({o_nor, o_or, o_nand, o_and} !== {r_nor, r_or, r_nand, r_and}) begin
          failures++;
          $display("tick %0d: got %b%b%b%b expected %b%b%b%b", i, o_nor, o_or, o_nand, o_and, r_nor, r_or, r_nand, r_and);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
