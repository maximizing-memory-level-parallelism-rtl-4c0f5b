// input_mux: write-data selector in front of the MTJ array.
//
// The CiM/Mem signal picks the source of the word written into the array:
// in memory mode (cim = 0) the input register, in computation mode (cim = 1)
// the binary result of the bit-stream-to-binary converter, so results go back
// into the array without leaving the memory. Combinational.
//
// The two sources and their selection by the CiM/Mem signal are as published;
// the encoding (cim = 1 for computation mode) is this design's choice.
module input_mux #(
  parameter int unsigned M = 6
) (
  input  logic         cim,        // 1 = computation mode, 0 = memory mode
  input  logic [M-1:0] in_reg,     // from the input register
  input  logic [M-1:0] conv_res,   // from the SC-to-binary converter
  output logic [M-1:0] wdata
);
  always_comb wdata = cim ? conv_res : in_reg;
endmodule
