// tb_adc: converts every column of random held values (0..384) and checks
// the 8-bit code (saturating at 255) and the one-clock conversion latency.
module tb_adc;
  localparam int COLS = 128;
  logic clk = 0, rst_n = 0, conv = 0, code_valid;
  logic [6:0] col;
  logic [COLS-1:0][8:0] held;
  logic [7:0] code;
  int checks = 0, failures = 0, sat = 0;

  adc dut (.clk, .rst_n, .conv, .col, .held, .code, .code_valid);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int c = 0; c < COLS; c++) held[c] = 9'($urandom_range(0, 384));
    held[3] = 9'd255; held[4] = 9'd256; held[5] = 9'd0;
    col = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < COLS; c++) begin
      int e;
      col = 7'(c); conv = 1;
      @(posedge clk); #1;
      conv = 0;
      e = held[c] > 255 ? 255 : int'(held[c]);
      if (held[c] > 255) sat++;
      checks++;
      if (!code_valid || int'(code) != e) begin
        failures++;
        $display("col %0d: held %0d code %0d valid %0d", c, held[c], code, code_valid);
      end
      @(posedge clk); #1;
      checks++;
      if (code_valid) failures++;     // no conversion requested
    end
    checks++;
    if (sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
