// lim_cell: logic-in-memory gate built around two MTJs and two sense amplifiers.
//
// It works in two phases of one tick each:
//  * preparation (prep = 1): the operands a and b program MTJ1 and MTJ2 into
//    the parallel / antiparallel state, i.e. they are stored;
//  * evaluation (eval = 1): the write paths are off, the two stored states are
//    sensed together and compared with two references; SA_NOR yields NOR and
//    its complement OR, SA_NAND yields NAND and its complement AND. The outputs
//    are registered at the end of the evaluation tick and held until the next.
// So a gate result appears two ticks (one memory cycle) after its operands.
//
// The two phases, the programming of MTJ1/MTJ2 from A and B and the four
// outputs follow the source. The voltage-divider sensing is reduced to the
// Boolean functions it produces; the tick-level timing is this design's choice.
module lim_cell (
  input  logic clk,
  input  logic rst_n,
  input  logic prep,
  input  logic eval,
  input  logic a,
  input  logic b,
  output logic out_nor,
  output logic out_or,
  output logic out_nand,
  output logic out_and
);
  logic mtj1, mtj2;   // programmed states (1 = antiparallel)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mtj1 <= 1'b0;
      mtj2 <= 1'b0;
    end else if (prep) begin
      mtj1 <= a;
      mtj2 <= b;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_nor  <= 1'b0;
      out_or   <= 1'b0;
      out_nand <= 1'b0;
      out_and  <= 1'b0;
    end else if (eval) begin
      out_nor  <= ~(mtj1 | mtj2);
      out_or   <=  (mtj1 | mtj2);
      out_nand <= ~(mtj1 & mtj2);
      out_and  <=  (mtj1 & mtj2);
    end
  end
endmodule
