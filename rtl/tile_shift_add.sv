// tile_shift_add: the tile's shift & add unit. A layer whose kernel has more
// than 128 rows is split over several subarray slices (in one core or in
// several); this accumulator adds their partial sums, one per clock. With
// load=1 the sum restarts from psum, with add=1 psum is added. The result is
// registered (available the clock after the last add). The grouping of
// slices is chosen by the tile controller.
module tile_shift_add import pim_pkg::*; #(
  parameter int P_W = PSUM_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic                  add,
  input  logic signed [P_W-1:0] psum,
  output logic signed [P_W-1:0] sum
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    sum <= '0;
    else if (load) sum <= psum;
    else if (add)  sum <= sum + psum;
endmodule
