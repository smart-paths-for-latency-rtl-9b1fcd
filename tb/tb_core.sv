// tb_core: a full-size core (8 subarrays of 128 x 128). Programs random
// signed weights, loads 1024 random 16-bit inputs over the 24-word bus,
// runs one operation and checks all 128 partial sums against the dot
// products computed here, and the operation time: done comes 2181 clocks after start (16 input
// bits x 128 columns at one ADC conversion per clock, plus 2 clocks of read
// and sample, 2 of drain, 128 to fill the output register and 1 for the
// registered done). A second
// operation with new inputs checks that the accumulators are cleared.
module tb_core;
  import pim_pkg::*;
  localparam int SUBS = 8, ROWS = 128, NRN = 16;
  logic clk = 0, rst_n = 0;
  logic ir_we = 0, prog_en = 0, start = 0, busy, done;
  logic [9:0] ir_base;
  logic [23:0][15:0] ir_wdata;
  logic [23:0] ir_wmask;
  logic [2:0] prog_sub;
  logic [6:0] prog_row, or_raddr;
  logic [255:0] prog_data;
  logic signed [39:0] or_rdata;
  int w [SUBS][ROWS][NRN];
  logic [15:0] x [SUBS*ROWS];
  int checks = 0, failures = 0, maxsum;

  core dut (.clk, .rst_n, .ir_we, .ir_base, .ir_wdata, .ir_wmask, .prog_en, .prog_sub, .prog_row,
            .prog_data, .start, .busy, .done, .or_raddr, .or_rdata);
  always #5 clk = ~clk;
  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run_op(input int op);
    int t0, lat;
    for (int i = 0; i < SUBS * ROWS; i++) x[i] = 16'($urandom);
    for (int b = 0; b * 24 < SUBS * ROWS; b++) begin
      ir_we = 1; ir_base = 10'(b * 24);
      for (int i = 0; i < 24; i++) begin
        ir_wmask[i] = (b * 24 + i) < SUBS * ROWS;
        ir_wdata[i] = ir_wmask[i] ? x[b * 24 + i] : 16'hdead;
      end
      @(posedge clk); #1;
    end
    ir_we = 0;
    // largest bitline sum, to make sure the 8-bit ADC does not saturate
    maxsum = 0;
    for (int s = 0; s < SUBS; s++)
      for (int t = 0; t < 16; t += 5)
        for (int c = 0; c < 128; c += 3) begin
          int sm; sm = 0;
          for (int r = 0; r < ROWS; r++)
            if (x[s * ROWS + r][t]) sm += ((w[s][r][c / 8] + WBIAS) >> (2 * (c % 8))) & 3;
          if (sm > maxsum) maxsum = sm;
        end
    start = 1; t0 = 0;
    @(posedge clk); #1; start = 0;
    lat = 1;
    while (!done) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != 2181) begin failures++; $display("op %0d latency %0d", op, lat); end
    for (int a = 0; a < SUBS * NRN; a++) begin
      longint e;
      int s, j;
      s = a / NRN; j = a % NRN;
      e = 0;
      for (int r = 0; r < ROWS; r++) e += longint'(x[s * ROWS + r]) * longint'(w[s][r][j]);
      or_raddr = 7'(a);
      @(posedge clk); #1;
      checks++;
      if (longint'(or_rdata) != e) begin
        failures++;
        if (failures < 6) $display("op %0d sub %0d nrn %0d: got %0d expected %0d", op, s, j, or_rdata, e);
      end
    end
    $display("op %0d: latency %0d clocks, largest sampled bitline sum %0d", op, lat, maxsum);
  endtask

  initial begin
    ir_base = '0; ir_wdata = '0; ir_wmask = '0; prog_sub = '0; prog_row = '0; prog_data = '0; or_raddr = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int s = 0; s < SUBS; s++)
      for (int r = 0; r < ROWS; r++) begin
        for (int j = 0; j < NRN; j++) begin
          logic [15:0] u;
          w[s][r][j] = int'($urandom_range(0, 16383)) - 8192;
          u = 16'(w[s][r][j] + WBIAS);
          for (int k = 0; k < 8; k++) prog_data[2 * (8 * j + k) +: 2] = u[2 * k +: 2];
        end
        prog_en = 1; prog_sub = 3'(s); prog_row = 7'(r);
        @(posedge clk); #1;
      end
    prog_en = 0;
    run_op(0);
    run_op(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
