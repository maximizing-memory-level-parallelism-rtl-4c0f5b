// io_register: M-bit load-enabled register, used as the input register
// (external word waiting to be written into the array) and as the output
// register (word read out of the array through SA2).
//
// On a tick with load high it takes d; otherwise it holds. Reset clears it.
// The source only names these registers; width M and the load enable are
// this design's choices.
module io_register #(
  parameter int unsigned M = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [M-1:0] d,
  output logic [M-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= '0;
    else if (load) q <= d;
  end
endmodule
