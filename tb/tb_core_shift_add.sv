// tb_core_shift_add: builds, in the testbench, the bitline sums a small
// 8-row crossbar would produce for random unsigned inputs and signed weights
// (stored with the +2^15 bias), feeds them column by column and bit by bit
// as ADC codes, and checks each lane's 16 results against the plain dot
// products sum(x*w).
module tb_core_shift_add;
  localparam int LANES = 2, NRN = 16, R = 8;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0;
  logic [6:0] col;
  logic [3:0] bit_idx;
  logic [LANES-1:0][7:0] code, popcnt;
  logic signed [39:0] psum [LANES][NRN];
  logic [15:0] x [LANES][R];
  int w [LANES][R][NRN];
  int checks = 0, failures = 0;

  core_shift_add #(.LANES(LANES), .NEURONS(NRN)) dut (.clk, .rst_n, .clear, .valid, .col, .bit_idx, .code, .popcnt, .psum);
  always #5 clk = ~clk;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    valid = 0; col = '0; bit_idx = '0; code = '0; popcnt = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      for (int l = 0; l < LANES; l++)
        for (int r = 0; r < R; r++) begin
          x[l][r] = (trial == 0) ? 16'hffff : 16'($urandom);
          for (int j = 0; j < NRN; j++)
            w[l][r][j] = (trial == 1) ? -32768 : (trial == 2) ? 32767 : int'($urandom_range(0, 65535)) - 32768;
        end
      clear = 1; @(posedge clk); #1; clear = 0;
      for (int t = 0; t < 16; t++)
        for (int c = 0; c < 128; c++) begin
          for (int l = 0; l < LANES; l++) begin
            int s, p;
            s = 0; p = 0;
            for (int r = 0; r < R; r++)
              if (x[l][r][t]) begin
                p++;
                s += ((w[l][r][c / 8] + 32768) >> (2 * (c % 8))) & 3;
              end
            code[l] = 8'(s); popcnt[l] = 8'(p);
          end
          col = 7'(c); bit_idx = 4'(t); valid = 1;
          @(posedge clk); #1;
          valid = 0;
        end
      for (int l = 0; l < LANES; l++)
        for (int j = 0; j < NRN; j++) begin
          longint e;
          e = 0;
          for (int r = 0; r < R; r++) e += longint'(x[l][r]) * longint'(w[l][r][j]);
          checks++;
          if (longint'(psum[l][j]) != e) begin
            failures++;
            if (failures < 5) $display("trial %0d lane %0d nrn %0d: got %0d expected %0d", trial, l, j, psum[l][j], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
