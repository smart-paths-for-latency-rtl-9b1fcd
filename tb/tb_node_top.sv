// tb_node_top: end-to-end run of a reduced node (4 x 2 mesh, 2 cores per
// tile) through a two-layer pipeline over a batch of two images.
//   tile A (0,0)  layer 1: 256 inputs -> 16 outputs per pixel (G = 2 slices),
//                 started by the host pixel by pixel, results sent to B;
//   tile B (3,1)  layer 2: 16 -> 16 outputs per pixel with 2x2 max pooling,
//                 auto mode: layer_sync starts each pixel once enough of A's
//                 output has arrived (4 x 2 image, l = 2: 6 pixels ahead),
//                 one image at a time; results sent to C;
//   tile C (0,1)  receives the pooled outputs in its memory.
// A->B goes 3 hops east, turns, 1 hop north; B->C goes 3 hops west, so both
// need SMART bypasses. The testbench computes both layers itself and checks
// C's memory. It counts the mechanisms: router bypasses, B waiting for its
// inputs (inter-layer pipelining), pooling windows held open, images
// finished by B (batch pipelining); each must happen at least once.
module tb_node_top;
  import pim_pkg::*;
  localparam int MX = 4, MY = 2, CORES = 2, NT = MX * MY;
  localparam int ROWS = 128, NRN = 16;
  localparam int IMW = 4, IMH = 2, NPIX = IMW * IMH, NIMG = 2, P = NPIX * NIMG;
  localparam int TA = 0, TB = 7, TC = 4;
  localparam int ASTRIDE = 32;           // A: 256 inputs = 32 rows per pixel
  logic clk = 0, rst_n = 0, cfg_valid = 0;
  logic [8:0] cfg_tile;
  cfg_op_e cfg_op;
  logic [15:0] cfg_addr;
  logic [255:0] cfg_data;
  logic [2:0] rd_tile = '0;
  logic [9:0] rd_addr = '0;
  logic [15:0] rd_data;
  logic [NT-1:0] tile_busy, tile_done;
  logic [31:0] bypass_count, wait_count, pool_hold_count, flit_count;
  int wa [2][ROWS][NRN];
  int wb [16][NRN];
  logic [15:0] x [P][256];
  logic [15:0] a_out [P][NRN];
  logic [15:0] b_out [P][NRN];
  int checks = 0, failures = 0;

  node_top #(.MESH_X(MX), .MESH_Y(MY), .CORES(CORES)) dut (
    .clk, .rst_n, .cfg_valid, .cfg_tile(cfg_tile[2:0]), .cfg_op, .cfg_addr, .cfg_data,
    .rd_tile, .rd_addr, .rd_data, .tile_busy, .tile_done,
    .bypass_count, .wait_count, .pool_hold_count, .flit_count);
  always #5 clk = ~clk;
  initial begin #50000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [15:0] plan(input longint s0);
    longint s;
    int a, y, v;
    s = s0 >>> 8;
    v = (s > 32767) ? 32767 : (s < -32768) ? -32768 : int'(s);
    a = (v < 0) ? -v : v;
    if (a > 32767) a = 32767;
    if (a >= 1280) y = 256;
    else if (a >= 608) y = (a >> 5) + 216;
    else if (a >= 256) y = (a >> 3) + 160;
    else y = (a >> 2) + 128;
    return 16'((v < 0) ? 256 - y : y);
  endfunction

  task automatic cfg(input int t, input cfg_op_e op, input int addr, input logic [255:0] data);
    cfg_valid = 1; cfg_tile = 9'(t); cfg_op = op; cfg_addr = 16'(addr); cfg_data = data;
    @(posedge clk); #1; cfg_valid = 0;
  endtask

  task automatic prog_row(input int t, input int core, input int sub, input int r, input int wr [NRN]);
    logic [255:0] d;
    for (int j = 0; j < NRN; j++) begin
      logic [15:0] u;
      u = 16'(wr[j] + WBIAS);
      for (int k = 0; k < 8; k++) d[2 * (8 * j + k) +: 2] = u[2 * k +: 2];
    end
    cfg(t, CFG_PROG, (core << 10) | (sub << 7) | r, d);
  endtask

  initial begin
    int zero [NRN];
    int started, t0;
    cfg_tile = '0; cfg_op = CFG_REG; cfg_addr = '0; cfg_data = '0;
    for (int j = 0; j < NRN; j++) zero[j] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // ---- weights ----
    for (int s = 0; s < 2; s++)
      for (int r = 0; r < ROWS; r++) begin
        for (int j = 0; j < NRN; j++) wa[s][r][j] = int'($urandom_range(0, 1023)) - 512;
        prog_row(TA, 0, s, r, wa[s][r]);
      end
    for (int r = 0; r < ROWS; r++) begin
      if (r < 16) begin
        for (int j = 0; j < NRN; j++) wb[r][j] = int'($urandom_range(0, 4095)) - 2048;
        prog_row(TB, 0, 0, r, wb[r]);
      end else prog_row(TB, 0, 0, r, zero);
    end
    // ---- inputs of all pixels into A's memory, and the reference ----
    for (int p = 0; p < P; p++) begin
      for (int i = 0; i < 256; i++) x[p][i] = 16'($urandom_range(0, 255));
      for (int rr = 0; rr < ASTRIDE; rr++) begin
        logic [255:0] d;
        d = '0;
        for (int i = 0; i < 8; i++) d[16 * i +: 16] = x[p][rr * 8 + i];
        cfg(TA, CFG_MEM, p * ASTRIDE + rr, d);
      end
      for (int j = 0; j < NRN; j++) begin
        longint s;
        s = 0;
        for (int i = 0; i < 256; i++) s += longint'(x[p][i]) * longint'(wa[i / 128][i % 128][j]);
        a_out[p][j] = plan(s);
      end
      for (int j = 0; j < NRN; j++) begin
        longint s;
        s = 0;
        for (int i = 0; i < 16; i++) s += longint'(a_out[p][i]) * longint'(wb[i][j]);
        b_out[p][j] = plan(s);
      end
    end
    // ---- configuration ----
    cfg(TA, CFG_REG, 0, 0);
    cfg(TA, CFG_REG, 16, (1 << 8) | 2);                  // 1 group of G = 2 slices
    cfg(TA, CFG_REG, 18, (0 << 10) | (1 << 5) | 3);       // to B (3,1), row 0
    cfg(TA, CFG_REG, 19, ASTRIDE);
    cfg(TA, CFG_REG, 17, 2);                              // send, no pooling, manual
    cfg(TA, CFG_REG, 22, 0);
    cfg(TB, CFG_REG, 0, 0);
    cfg(TB, CFG_REG, 16, (1 << 8) | 1);                  // 1 group of 1 slice
    cfg(TB, CFG_REG, 18, (0 << 10) | (1 << 5) | 0);       // to C (0,1), row 0
    cfg(TB, CFG_REG, 19, 2);                              // 16 values = 2 rows per pixel
    cfg(TB, CFG_REG, 20, (2 << 20) | (IMH << 10) | IMW);  // l = 2
    cfg(TB, CFG_REG, 21, NRN);                            // n = 16 values per pixel
    cfg(TB, CFG_REG, 22, 0);
    cfg(TB, CFG_REG, 17, 7);                              // auto, send, pool
    // ---- run: the host starts A pixel by pixel ----
    t0 = $time;
    started = 0;
    while (started < P) begin
      if (!tile_busy[TA]) begin
        cfg(TA, CFG_START, 0, 0);
        started++;
      end
      @(posedge clk); #1;
    end
    while (tile_busy[TA]) begin @(posedge clk); #1; end
    while (dut.g_tile[TB].u_tile.u_sync.images_done != 16'(NIMG) || tile_busy[TB]) begin @(posedge clk); #1; end
    repeat (20) @(posedge clk); #1;
    // ---- check C's memory: one pooled output pixel per 4 pixels of B ----
    for (int k = 0; k < P / 4; k++)
      for (int j = 0; j < NRN; j++) begin
        logic [15:0] m, g;
        m = b_out[4 * k][j];
        for (int i = 1; i < 4; i++) if (b_out[4 * k + i][j] > m) m = b_out[4 * k + i][j];
        g = dut.g_tile[TC].u_tile.u_mem.mem[2 * k + j / 8][16 * (j % 8) +: 16];
        checks++;
        if (g != m) begin
          failures++;
          if (failures < 6) $display("pooled pixel %0d out %0d: got %0d expected %0d", k, j, g, m);
        end
      end
    $display("clocks %0d, flits %0d, bypasses %0d, B wait clocks %0d, pooling holds %0d, images %0d",
             ($time - t0) / 10, flit_count, bypass_count, wait_count, pool_hold_count,
             dut.g_tile[TB].u_tile.u_sync.images_done);
    checks += 5;
    if (bypass_count == 0) begin failures++; $display("no SMART bypass"); end
    if (wait_count == 0) begin failures++; $display("no inter-layer wait"); end
    if (pool_hold_count == 0) begin failures++; $display("no pooling hold"); end
    if (dut.g_tile[TB].u_tile.u_sync.images_done != 16'(NIMG)) begin failures++; $display("batch incomplete"); end
    if (flit_count != 32'(P * 2 + (P / 4) * 2)) begin failures++; $display("flit count %0d", flit_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
