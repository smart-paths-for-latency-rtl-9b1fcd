// tb_sample_hold: applies random bitline values, samples some of them and
// checks that the held values are the sampled ones and stay put while the
// bitlines change.
module tb_sample_hold;
  localparam int COLS = 128;
  logic clk = 0, sample = 0;
  logic [COLS-1:0][8:0] bl, held, expect_v;
  int checks = 0, failures = 0;

  sample_hold dut (.clk, .sample, .bl, .held);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int c = 0; c < COLS; c++) bl[c] = 9'($urandom_range(0, 384));
      sample = (t % 3 != 2) || t == 0;
      if (sample) expect_v = bl;
      @(posedge clk); #1;
      sample = 0;
      for (int c = 0; c < COLS; c++) bl[c] = 9'($urandom_range(0, 384));
      @(posedge clk); #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (held[c] != expect_v[c]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
