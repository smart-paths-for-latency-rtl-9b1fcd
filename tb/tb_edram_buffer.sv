// tb_edram_buffer: writes random words to random addresses of a 2 KB buffer
// (1024 x 16 bit) and reads them back on two read ports, checking data and
// the one-clock read latency against a shadow copy.
module tb_edram_buffer;
  localparam int WORDS = 1024;
  logic clk = 0, we = 0;
  logic [9:0] waddr;
  logic [15:0] wdata;
  logic [1:0][9:0] raddr;
  logic [1:0][15:0] rdata;
  logic [15:0] shadow [WORDS];
  int checks = 0, failures = 0;

  edram_buffer #(.WORDS(WORDS), .WIDTH(16), .RPORTS(2)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int a = 0; a < WORDS; a++) begin
      shadow[a] = 16'($urandom);
      we = 1; waddr = 10'(a); wdata = shadow[a];
      @(posedge clk); #1;
    end
    we = 0;
    for (int t = 0; t < 2000; t++) begin
      int a0, a1;
      a0 = $urandom_range(0, WORDS - 1); a1 = $urandom_range(0, WORDS - 1);
      raddr[0] = 10'(a0); raddr[1] = 10'(a1);
      if (t % 4 == 0) begin
        we = 1; waddr = 10'($urandom_range(0, WORDS - 1)); wdata = 16'($urandom);
      end
      @(posedge clk); #1;
      checks += 2;
      if (rdata[0] != shadow[a0]) failures++;
      if (rdata[1] != shadow[a1]) failures++;
      if (we) shadow[waddr] = wdata;
      we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
