// mtj_array: ROWS x M array of MTJ memory cells.
//
// Each cell stores one bit as the magnetic state of its MTJ: 0 = parallel
// (low resistance), 1 = antiparallel (high resistance). Cells have separate
// write and read paths, so the array offers one write port and two read ports
// that can be used in the same tick.
//
//  * Write: every row whose WWL is high takes wdata at the clock edge (the write
//    current direction is set by the IN signal of each column).
//  * Read: the rows whose RWL is high drive their cells onto a memory bus. The
//    array has two buses, one per operand decoder (rwl1 -> bus1 -> SA1,
//    rwl2 -> bus2 -> SA2). With more than one row selected the bus carries the
//    OR of the rows (this design's choice; the controller never does that).
//    The bus is combinational; a sense amplifier samples it.
//
// Storage is not reset: like any memory it holds whatever was written.
// The array organisation with two read buses follows the block diagram of the
// design; the number of rows is this design's choice.
module mtj_array #(
  parameter int unsigned ROWS = 64,
  parameter int unsigned M    = 6
) (
  input  logic            clk,
  input  logic [ROWS-1:0] wwl,     // write wordlines (one-hot)
  input  logic [M-1:0]    wdata,   // IN of each column
  input  logic [ROWS-1:0] rwl1,    // read wordlines from decoder 1
  input  logic [ROWS-1:0] rwl2,    // read wordlines from decoder 2
  output logic [M-1:0]    bus1,    // memory bus to SA1
  output logic [M-1:0]    bus2     // memory bus to SA2
);
  logic [M-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    for (int unsigned r = 0; r < ROWS; r++)
      if (wwl[r]) cells[r] <= wdata;
  end

  always_comb begin
    bus1 = '0;
    bus2 = '0;
    for (int unsigned r = 0; r < ROWS; r++) begin
      if (rwl1[r]) bus1 |= cells[r];
      if (rwl2[r]) bus2 |= cells[r];
    end
  end
endmodule
