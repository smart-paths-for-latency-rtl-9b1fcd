// max_pool: the tile's max pooling unit. The four values of a 2 x 2 window
// arrive in four consecutive tile operations; the running maximum of each
// output neuron lives in the tile output register. For each value the unit
// returns the new running maximum: x itself for the first value of a window,
// max(prev, x) otherwise. Values are unsigned (sigmoid outputs).
// Combinational. The 2 x 2 window is the architecture's; keeping the running
// maximum in the output register is this design's choice.
module max_pool import pim_pkg::*; (
  input  logic              first,
  input  logic [DATA_W-1:0] x,
  input  logic [DATA_W-1:0] prev,
  output logic [DATA_W-1:0] y
);
  always_comb y = (first || x > prev) ? x : prev;
endmodule
