// tb_mesh_noc: an 8 x 8 SMART mesh (the synthetic-traffic setup) with the
// 14-hop reach.
//  1. a lone flit crossing 7 routers in a straight line is ejected 2 clocks
//     after injection (one multi-hop traversal, one ejection), where a
//     router-by-router network would need at least 7;
//  2. a lone flit with one XY turn takes 3 clocks;
//  3. uniform random traffic (every node, 2000 clocks): every flit is
//     delivered exactly once, at its destination, with its data; bypasses
//     and stops behind local flits both occur.
module tb_mesh_noc;
  import pim_pkg::*;
  localparam int MX = 8, MY = 8, N = MX * MY;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] inj_valid, inj_ready, ej_valid, ej_ready;
  flit_t inj_flit [N];
  flit_t ej_flit [N];
  logic [31:0] bypass_count;
  int checks = 0, failures = 0;
  int sent = 0, got = 0, cyc = 0;
  bit seen [int];
  int dest_of [int];

  mesh_noc #(.MESH_X(MX), .MESH_Y(MY)) dut (.clk, .rst_n, .inj_valid, .inj_flit, .inj_ready,
    .ej_valid, .ej_flit, .ej_ready, .bypass_count);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic flit_t mk(input int x, input int y, input int id);
    flit_t f;
    f.x = 5'(x); f.y = 5'(y); f.row = 12'(id); f.data = {32'(id), 32'(x), 32'(y), 32'(id ^ 32'h5a5a)};
    return f;
  endfunction

  task automatic lone(input int sx, input int sy, input int dx, input int dy, input int expect_lat);
    int t0, d;
    d = dy * MX + dx;
    inj_flit[sy * MX + sx] = mk(dx, dy, 999);
    inj_valid[sy * MX + sx] = 1;
    @(posedge clk); #1; inj_valid = '0; t0 = cyc;
    while (!ej_valid[d] && cyc - t0 < 50) begin @(posedge clk); #1; end
    checks += 2;
    if (cyc - t0 + 1 != expect_lat) begin failures++; $display("lone (%0d,%0d)->(%0d,%0d): %0d clocks", sx, sy, dx, dy, cyc - t0 + 1); end
    else $display("lone (%0d,%0d)->(%0d,%0d): ejected %0d clocks after injection", sx, sy, dx, dy, cyc - t0 + 1);
    if (ej_flit[d] != mk(dx, dy, 999)) failures++;
    @(posedge clk); #1;
  endtask

  initial begin
    int byp0;
    inj_valid = '0; ej_ready = '1;
    for (int i = 0; i < N; i++) inj_flit[i] = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    lone(0, 3, 7, 3, 2);
    lone(7, 5, 0, 5, 2);
    lone(0, 0, 7, 7, 3);
    lone(6, 7, 1, 0, 3);
    byp0 = int'(bypass_count);
    // uniform random traffic, offered at 10% per node and clock
    for (int t = 0; t < 2000; t++) begin
      logic [N-1:0] take, eject;
      for (int i = 0; i < N; i++)
        if (!inj_valid[i] && $urandom_range(0, 99) < 10) begin
          int dx, dy;
          dx = $urandom_range(0, MX - 1); dy = $urandom_range(0, MY - 1);
          inj_flit[i] = mk(dx, dy, sent);
          dest_of[sent] = dy * MX + dx;
          inj_valid[i] = 1;
          sent++;
        end
      for (int i = 0; i < N; i++) ej_ready[i] = ($urandom_range(0, 9) != 0);
      #1;
      take  = inj_valid & inj_ready;
      eject = ej_valid & ej_ready;
      for (int i = 0; i < N; i++)
        if (eject[i]) begin
          int id;
          id = int'(ej_flit[i].data[127:96]);
          checks++;
          if (seen.exists(id) || !dest_of.exists(id) || dest_of[id] != i || ej_flit[i] != mk(i % MX, i / MX, id)) begin
            failures++;
            if (failures < 5) $display("bad delivery of %0d at node %0d", id, i);
          end
          seen[id] = 1; got++;
        end
      @(posedge clk); #1;
      inj_valid = inj_valid & ~take;
    end
    inj_valid = '0; ej_ready = '1;
    for (int t = 0; t < 500 && got < sent; t++) begin
      #1;
      for (int i = 0; i < N; i++)
        if (ej_valid[i]) begin
          int id;
          id = int'(ej_flit[i].data[127:96]);
          checks++;
          if (seen.exists(id) || dest_of[id] != i) failures++;
          seen[id] = 1; got++;
        end
      @(posedge clk); #1;
    end
    checks += 2;
    if (got != sent) begin failures++; $display("delivered %0d of %0d", got, sent); end
    if (int'(bypass_count) <= byp0) failures++;
    $display("random traffic: %0d flits delivered, %0d router bypasses", got, int'(bypass_count) - byp0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
