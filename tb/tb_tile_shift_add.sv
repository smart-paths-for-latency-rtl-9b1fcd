// tb_tile_shift_add: accumulates random groups of signed partial sums and
// checks each group's total.
module tb_tile_shift_add;
  logic clk = 0, rst_n = 0, load = 0, add = 0;
  logic signed [39:0] psum, sum;
  int checks = 0, failures = 0;

  tile_shift_add dut (.clk, .rst_n, .load, .add, .psum, .sum);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    load = 0; add = 0; psum = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int g = 0; g < 200; g++) begin
      longint e;
      int n;
      n = $urandom_range(1, 12);
      e = 0;
      for (int i = 0; i < n; i++) begin
        longint v;
        v = longint'($urandom) - longint'(32'h8000_0000);
        v = v * 8;
        e += v;
        psum = 40'(v); load = (i == 0); add = (i != 0);
        @(posedge clk); #1;
      end
      load = 0; add = 0;
      @(posedge clk); #1;          // hold
      checks++;
      if (longint'(sum) != e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
