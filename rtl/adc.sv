// adc: behavioural model of one 8-bit ADC shared by the 128 sample & hold
// outputs of a subarray. Each clock with conv=1 it converts the held value of
// column col; the code appears one clock later with code_valid. At the
// 1.28 GS/s rate of the architecture, the clock of this design is the ADC
// sample clock and a whole subarray (128 columns) takes 128 clocks.
//
// A 128-row column of 2-bit cells can sum to 384, more than 8 bits hold. The
// architecture does not say how that range is handled; this model saturates
// at 255, and callers that need exact results keep column sums below 256.
module adc #(
  parameter int COLS = 128,
  parameter int BL_W = 9,
  parameter int BITS = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      conv,
  input  logic [$clog2(COLS)-1:0]   col,
  input  logic [COLS-1:0][BL_W-1:0] held,
  output logic [BITS-1:0]           code,
  output logic                      code_valid
);
  localparam int MAXC = (1 << BITS) - 1;
  logic [BL_W-1:0] v;
  assign v = held[col];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      code       <= '0;
      code_valid <= 1'b0;
    end else begin
      code_valid <= conv;
      if (conv) code <= (int'(v) > MAXC) ? BITS'(MAXC) : v[BITS-1:0];
    end
endmodule
