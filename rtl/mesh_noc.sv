// mesh_noc: the network-on-chip of the node, a MESH_X x MESH_Y 2D mesh of
// smart_router instances (16 x 20 in the architecture) with XY routing and
// SMART multi-hop bypass. Each router connects to its four neighbours with a
// forward link (flit + SSR vector) and a backward accept wire per direction;
// edge ports are tied off. Node n = y*MESH_X + x has an injection and an
// ejection port for its tile. A flit injected at one node reaches a node up
// to HPC_MAX hops away in a straight line in a single clock when nothing
// competes with it, and stops (one clock) at the turn of its XY path.
// bypass_count counts router bypasses over all routers, for testbenches.
module mesh_noc import pim_pkg::*; #(
  parameter int MESH_X = 16,
  parameter int MESH_Y = 20,
  parameter int DEPTH  = 4,
  localparam int N     = MESH_X * MESH_Y
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [N-1:0]   inj_valid,
  input  flit_t          inj_flit [N],
  output logic [N-1:0]   inj_ready,
  output logic [N-1:0]   ej_valid,
  output flit_t          ej_flit [N],
  input  logic [N-1:0]   ej_ready,
  output logic [31:0]    bypass_count
);
  logic [N-1:0][3:0] byp;

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      link_t out_e, out_w, out_n, out_s;
      link_t in_e, in_w, in_n, in_s;
      logic  acc_out_e, acc_out_w, acc_out_n, acc_out_s;
      logic  acc_in_e, acc_in_w, acc_in_n, acc_in_s;

      if (x > 0) begin : g_w
        assign in_w     = g_y[y].g_x[x-1].out_e;
        assign acc_in_w = g_y[y].g_x[x-1].acc_out_e;
      end else begin : g_w0
        assign in_w     = '0;
        assign acc_in_w = 1'b0;
      end
      if (x < MESH_X - 1) begin : g_e
        assign in_e     = g_y[y].g_x[x+1].out_w;
        assign acc_in_e = g_y[y].g_x[x+1].acc_out_w;
      end else begin : g_e0
        assign in_e     = '0;
        assign acc_in_e = 1'b0;
      end
      if (y > 0) begin : g_s
        assign in_s     = g_y[y-1].g_x[x].out_n;
        assign acc_in_s = g_y[y-1].g_x[x].acc_out_n;
      end else begin : g_s0
        assign in_s     = '0;
        assign acc_in_s = 1'b0;
      end
      if (y < MESH_Y - 1) begin : g_n
        assign in_n     = g_y[y+1].g_x[x].out_s;
        assign acc_in_n = g_y[y+1].g_x[x].acc_out_s;
      end else begin : g_n0
        assign in_n     = '0;
        assign acc_in_n = 1'b0;
      end

      smart_router #(.DEPTH(DEPTH)) u_r (
        .clk, .rst_n, .my_x(COORD_W'(x)), .my_y(COORD_W'(y)),
        .in_e, .in_w, .in_n, .in_s, .out_e, .out_w, .out_n, .out_s,
        .acc_in_e, .acc_in_w, .acc_in_n, .acc_in_s,
        .acc_out_e, .acc_out_w, .acc_out_n, .acc_out_s,
        .inj_valid(inj_valid[y*MESH_X+x]), .inj_flit(inj_flit[y*MESH_X+x]),
        .inj_ready(inj_ready[y*MESH_X+x]),
        .ej_valid(ej_valid[y*MESH_X+x]), .ej_flit(ej_flit[y*MESH_X+x]),
        .ej_ready(ej_ready[y*MESH_X+x]), .bypass_now(byp[y*MESH_X+x]));
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) bypass_count <= '0;
    else begin
      int s;
      s = 0;
      for (int i = 0; i < N; i++) s += $countones(byp[i]);
      bypass_count <= bypass_count + 32'(s);
    end
endmodule
