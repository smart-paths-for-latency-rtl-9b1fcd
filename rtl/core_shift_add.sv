// core_shift_add: shift & add unit of a PIM core. Four of them serve the
// eight ADCs of a core, so each one takes LANES=2 ADC codes per clock, one
// per subarray.
//
// A 16-bit weight occupies 8 adjacent bitlines of 2-bit cells (slice k holds
// weight bits 2k+1:2k) and the 16-bit input is applied one bit per read
// (bit t). The dot product therefore is the sum over t and k of
// colsum(t,k) << (2k+t). Weights are signed; they are stored with a bias of
// 2^15 added (offset binary), and the bias is removed here by subtracting
// popcnt(t) << (15+t), where popcnt(t) is the number of wordlines driven in
// read t (the sum of the input bits). The shifts follow the architecture; the
// bias scheme is this design's choice.
//
// Timing: one code per lane per clock while valid=1; clear resets all
// accumulators. psum is the registered accumulator state.
module core_shift_add import pim_pkg::*; #(
  parameter int LANES   = 2,
  parameter int NEURONS = 16,      // weights per subarray row = 128 / 8
  parameter int P_W     = PSUM_W,
  localparam int CW     = $clog2(NEURONS * SLICES)
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   clear,
  input  logic                                   valid,
  input  logic [CW-1:0]                          col,      // bitline of the codes
  input  logic [3:0]                             bit_idx,  // input bit t
  input  logic [LANES-1:0][ADC_BITS-1:0]         code,
  input  logic [LANES-1:0][7:0]                  popcnt,   // driven wordlines, 0..128
  output logic signed [P_W-1:0]                  psum [LANES][NEURONS]
);
  logic [$clog2(NEURONS)-1:0] nrn;
  logic [$clog2(SLICES)-1:0]  slc;
  assign nrn = col[CW-1:$clog2(SLICES)];
  assign slc = col[$clog2(SLICES)-1:0];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++)
        for (int n = 0; n < NEURONS; n++) psum[l][n] <= '0;
    end else if (clear) begin
      for (int l = 0; l < LANES; l++)
        for (int n = 0; n < NEURONS; n++) psum[l][n] <= '0;
    end else if (valid) begin
      for (int l = 0; l < LANES; l++) begin
        logic signed [P_W-1:0] add, sub;
        add = P_W'(code[l]) <<< (2 * int'(slc) + int'(bit_idx));
        sub = (slc == 0) ? (P_W'(popcnt[l]) <<< (DATA_W - 1 + int'(bit_idx))) : '0;
        psum[l][nrn] <= psum[l][nrn] + add - sub;
      end
    end
endmodule
