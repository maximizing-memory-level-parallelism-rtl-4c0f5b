// wl_decoder: row address decoder of the MTJ array (one per operand).
//
// Turns a row address into one-hot write-wordline (WWL) and read-wordline
// (RWL) vectors. A wordline is high only while its enable is high, so the
// array sees no wordline between accesses. Purely combinational: the wordlines
// follow the address in the same tick.
//
// The design has two such decoders, one per operand address, each able to
// drive both WWL and RWL of every row. The decoding itself (binary to one-hot)
// is this design's own choice; the source only names the block.
module wl_decoder #(
  parameter int unsigned ROWS = 64,
  parameter int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic [AW-1:0]   addr,
  input  logic            wwl_en,   // assert the write wordline of addr
  input  logic            rwl_en,   // assert the read wordline of addr
  output logic [ROWS-1:0] wwl,
  output logic [ROWS-1:0] rwl
);
  logic [ROWS-1:0] onehot;

  always_comb begin
    onehot = '0;
    for (int unsigned r = 0; r < ROWS; r++)
      if (addr == AW'(r)) onehot[r] = 1'b1;
  end

  assign wwl = wwl_en ? onehot : '0;
  assign rwl = rwl_en ? onehot : '0;
endmodule
