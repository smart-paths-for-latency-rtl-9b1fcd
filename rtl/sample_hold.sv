// sample_hold: behavioural model of the 128 sample & hold circuits of one
// subarray (an analog part in the chip). On a clock edge with sample=1 it
// captures all bitline values and holds them while the ADC converts them one
// column at a time, so that the crossbar can already be driven with the next
// input bit. The clocked capture is this design's choice of sampling instant.
module sample_hold #(
  parameter int COLS = 128,
  parameter int BL_W = 9
) (
  input  logic                      clk,
  input  logic                      sample,
  input  logic [COLS-1:0][BL_W-1:0] bl,
  output logic [COLS-1:0][BL_W-1:0] held
);
  always_ff @(posedge clk)
    if (sample) held <= bl;
endmodule
