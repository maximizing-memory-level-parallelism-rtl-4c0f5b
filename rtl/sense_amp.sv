// sense_amp: M-bit sense amplifier bank (SA1 / SA2) at the end of a memory bus.
//
// On a tick with sense_en high it resolves the M bus bits (cell state
// high/low resistance) into digital values and latches them; dout holds the
// last sensed word until the next sense. Reset clears it.
//
// The resistance comparison against a reference is analog; here it is reduced
// to sampling the bit each cell stores. The latch-on-enable behaviour and the
// one-tick latency are this design's choices.
module sense_amp #(
  parameter int unsigned M = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sense_en,
  input  logic [M-1:0] bus,
  output logic [M-1:0] dout
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        dout <= '0;
    else if (sense_en) dout <= bus;
  end
endmodule
