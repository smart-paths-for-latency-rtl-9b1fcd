// edram_buffer: the eDRAM buffers of the node (core input/output registers,
// 64 KB tile memory, tile output register), modelled as a synchronous RAM
// with one write port and RPORTS read ports. A read returns the word one
// clock after its address is presented. Refresh is not modelled; the read
// latency and port count are this design's choices, the capacities come from
// the architecture (set by the instantiating module).
module edram_buffer #(
  parameter int WORDS  = 1024,
  parameter int WIDTH  = 16,
  parameter int RPORTS = 1,
  localparam int AW    = $clog2(WORDS)
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [WIDTH-1:0]      wdata,
  input  logic [RPORTS-1:0][AW-1:0]    raddr,
  output logic [RPORTS-1:0][WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int p = 0; p < RPORTS; p++) rdata[p] <= mem[raddr[p]];
  end
endmodule
