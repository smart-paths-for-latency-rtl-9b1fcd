// tb_tile: one tile with 2 cores (16 subarray slices) to keep the run short.
// Weights: random signed; each output neuron sums G = 2 slices (a 256-row
// kernel), 8 groups give 128 outputs. Inputs are written into tile memory;
// each pixel uses its own memory region (stride).
//  1. a pixel without pooling: the 16 flits sent must carry
//     sigmoid((sum x*w) >> 8) for all 128 outputs, computed here;
//  2. four pixels with 2x2 max pooling: nothing is sent for the first three,
//     the fourth sends the element-wise maximum;
//  3. flits arriving from the router are written into tile memory (checked
//     by reading the input back through a later operation's result).
// The router is modelled by the testbench, which accepts flits at random.
module tb_tile;
  import pim_pkg::*;
  localparam int CORES = 2, SUBS = 8, ROWS = 128, NRN = 16, G = 2, NG = 8, NOUT = NG * NRN;
  localparam int STRIDE = 256;     // memory rows per pixel (2 cores x 1024 words / 8)
  logic clk = 0, rst_n = 0;
  logic cfg_valid = 0;
  cfg_op_e cfg_op;
  logic [15:0] cfg_addr;
  logic [255:0] cfg_data;
  logic busy, done, inj_valid, inj_ready, ej_valid, ej_ready, ev_wait, ev_pool_hold, ev_sent;
  logic [9:0] rd_addr;
  logic [15:0] rd_data;
  flit_t inj_flit, ej_flit;
  int w [CORES*SUBS][ROWS][NRN];
  logic [15:0] x [4][CORES*SUBS*ROWS];
  logic [15:0] expect_v [NOUT];
  logic [15:0] got [NOUT];
  int checks = 0, failures = 0, nflits, holds = 0;

  tile #(.CORES(CORES)) dut (.clk, .rst_n, .cfg_valid, .cfg_op, .cfg_addr, .cfg_data, .busy, .done,
    .rd_addr, .rd_data, .inj_valid, .inj_flit, .inj_ready, .ej_valid, .ej_flit, .ej_ready,
    .ev_wait, .ev_pool_hold, .ev_sent);
  always #5 clk = ~clk;
  initial begin #200000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n && ev_pool_hold) holds++;

  // reference sigmoid: piecewise-linear PLAN on Q8.8
  function automatic logic [15:0] plan(input int v);
    int a, y;
    a = (v < 0) ? -v : v;
    if (a > 32767) a = 32767;
    if (a >= 1280) y = 256;
    else if (a >= 608) y = (a >> 5) + 216;
    else if (a >= 256) y = (a >> 3) + 160;
    else y = (a >> 2) + 128;
    return 16'((v < 0) ? 256 - y : y);
  endfunction

  function automatic logic [15:0] ref_out(input int p, input int o);
    longint s;
    int g, j, v;
    g = o / NRN; j = o % NRN;
    s = 0;
    for (int q = g * G; q < g * G + G; q++)
      for (int r = 0; r < ROWS; r++) s += longint'(x[p][q * ROWS + r]) * longint'(w[q][r][j]);
    s = s >>> 8;
    v = (s > 32767) ? 32767 : (s < -32768) ? -32768 : int'(s);
    return plan(v);
  endfunction

  task automatic cfg(input cfg_op_e op, input int addr, input logic [255:0] data);
    cfg_valid = 1; cfg_op = op; cfg_addr = 16'(addr); cfg_data = data;
    @(posedge clk); #1; cfg_valid = 0;
  endtask

  task automatic collect(output int n);
    n = 0;
    while (busy || n == 0) begin
      inj_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (inj_valid && inj_ready) begin
        checks += 2;
        if (inj_flit.x != 5'd3 || inj_flit.y != 5'd4) failures++;
        if (int'(inj_flit.row) != 100 + n) failures++;
        for (int i = 0; i < 8; i++) got[n * 8 + i] = inj_flit.data[16 * i +: 16];
        n++;
      end
      @(posedge clk); #1;
      if (!busy && n == 0) break;
    end
    inj_ready = 0;
  endtask

  initial begin
    cfg_op = CFG_REG; cfg_addr = '0; cfg_data = '0; inj_ready = 0; ej_valid = 0; ej_flit = '0; rd_addr = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // weights
    for (int q = 0; q < CORES * SUBS; q++)
      for (int r = 0; r < ROWS; r++) begin
        logic [255:0] d;
        for (int j = 0; j < NRN; j++) begin
          logic [15:0] u;
          w[q][r][j] = int'($urandom_range(0, 1023)) - 512;
          u = 16'(w[q][r][j] + WBIAS);
          for (int k = 0; k < 8; k++) d[2 * (8 * j + k) +: 2] = u[2 * k +: 2];
        end
        cfg(CFG_PROG, ((q / SUBS) << 10) | ((q % SUBS) << 7) | r, d);
      end
    // inputs of 4 pixels, Q8.8 in [0, 1)
    for (int p = 0; p < 4; p++)
      for (int i = 0; i < CORES * SUBS * ROWS; i++) x[p][i] = 16'($urandom_range(0, 255));
    for (int p = 0; p < 4; p++)
      for (int rr = 0; rr < STRIDE; rr++) begin
        logic [255:0] d;
        d = '0;
        for (int i = 0; i < 8; i++) d[16 * i +: 16] = x[p][rr * 8 + i];
        if (p < 3) cfg(CFG_MEM, p * STRIDE + rr, d);
        else begin          // pixel 3 arrives as flits from the network
          ej_flit.x = 0; ej_flit.y = 0; ej_flit.row = 12'(p * STRIDE + rr); ej_flit.data = d[127:0];
          ej_valid = 1; @(posedge clk); #1;
          while (!ej_ready) begin @(posedge clk); #1; end
          ej_valid = 0;
        end
      end
    cfg(CFG_REG, 0, 0);          // core 0 reads rows 0..127 of the pixel
    cfg(CFG_REG, 1, 128);        // core 1 rows 128..255
    cfg(CFG_REG, 16, (NG << 8) | G);
    cfg(CFG_REG, 18, (100 << 10) | (4 << 5) | 3);
    cfg(CFG_REG, 19, STRIDE);
    // 1. no pooling
    cfg(CFG_REG, 17, 2);
    cfg(CFG_REG, 22, 0);
    cfg(CFG_START, 0, 0);
    collect(nflits);
    checks++;
    if (nflits != NOUT / 8) begin failures++; $display("sent %0d flits", nflits); end
    for (int o = 0; o < NOUT; o++) begin
      checks++;
      if (got[o] != ref_out(0, o)) begin
        failures++;
        if (failures < 6) $display("pixel 0 out %0d: got %0d expected %0d", o, got[o], ref_out(0, o));
      end
    end
    // 2. pooling over pixels 0..3
    cfg(CFG_REG, 17, 3);
    cfg(CFG_REG, 22, 0);
    for (int o = 0; o < NOUT; o++) begin
      expect_v[o] = ref_out(0, o);
      for (int p = 1; p < 4; p++) if (ref_out(p, o) > expect_v[o]) expect_v[o] = ref_out(p, o);
    end
    for (int p = 0; p < 4; p++) begin
      cfg(CFG_START, 0, 0);
      collect(nflits);
      checks++;
      if ((p < 3 && nflits != 0) || (p == 3 && nflits != NOUT / 8)) begin
        failures++; $display("pool pixel %0d: %0d flits", p, nflits);
      end
    end
    for (int o = 0; o < NOUT; o++) begin
      checks++;
      if (got[o] != expect_v[o]) begin
        failures++;
        if (failures < 6) $display("pooled out %0d: got %0d expected %0d", o, got[o], expect_v[o]);
      end
      rd_addr = 10'(o); @(posedge clk); #1;
      checks++;
      if (rd_data != expect_v[o]) failures++;
    end
    checks++;
    if (holds != 3) begin failures++; $display("pool holds %0d", holds); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
