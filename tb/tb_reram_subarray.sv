// tb_reram_subarray: programs random 2-bit levels into every cell, drives
// random wordline patterns and checks every bitline against the sum of the
// driven cells kept in the testbench. Also checks that the bitlines hold
// their value between reads.
module tb_reram_subarray;
  localparam int ROWS = 128, COLS = 128;
  logic clk = 0, prog_en = 0, read = 0;
  logic [6:0] prog_row;
  logic [COLS*2-1:0] prog_data;
  logic [ROWS-1:0] wl;
  logic [COLS-1:0][8:0] bl;
  logic [1:0] ref_cell [ROWS][COLS];
  int checks = 0, failures = 0;

  reram_subarray dut (.clk, .prog_en, .prog_row, .prog_data, .read, .wl, .bl);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    wl = '0;
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        ref_cell[r][c] = 2'($urandom_range(0, 3));
        prog_data[2*c +: 2] = ref_cell[r][c];
      end
      prog_row = 7'(r); prog_en = 1;
      @(posedge clk); #1;
    end
    prog_en = 0;
    for (int t = 0; t < 20; t++) begin
      for (int r = 0; r < ROWS; r++) wl[r] = (t == 0) ? 1'b1 : (t == 1) ? 1'b0 : 1'($urandom_range(0, 1));
      read = 1; @(posedge clk); #1; read = 0;
      wl = ~wl;                              // must not affect held bitlines
      @(posedge clk); #1;
      wl = ~wl;
      for (int c = 0; c < COLS; c++) begin
        int s; s = 0;
        for (int r = 0; r < ROWS; r++) if (wl[r]) s += ref_cell[r][c];
        checks++;
        if (int'(bl[c]) != s) begin
          failures++;
          if (failures < 5) $display("read %0d col %0d: got %0d expected %0d", t, c, bl[c], s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
