// tb_max_pool: feeds random 2x2 windows value by value, keeping the running
// maximum as the tile does, and checks the maximum of every window.
module tb_max_pool;
  logic first;
  logic [15:0] x, prev, y;
  int checks = 0, failures = 0;

  max_pool dut (.first, .x, .prev, .y);
  initial begin
    for (int w = 0; w < 500; w++) begin
      logic [15:0] v [4];
      logic [15:0] m;
      m = '0;
      prev = 16'($urandom);
      for (int i = 0; i < 4; i++) begin
        v[i] = (w % 5 == 0) ? 16'(i * 7) : 16'($urandom_range(0, 256));
        if (i == 0 || v[i] > m) m = v[i];
        first = (i == 0); x = v[i];
        #1;
        prev = y;
      end
      checks++;
      if (prev != m) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
