// node_top: the whole chip ("node") of the ReRAM processing-in-memory CNN
// accelerator: MESH_X x MESH_Y tiles (16 x 20 = 320), each with 12 crossbar
// cores, and a SMART mesh network-on-chip with one router per tile.
//
// A CNN is mapped layer by layer onto groups of tiles: the weights are
// programmed once into the crossbars, input pixels are written into the tile
// memories, and each tile operation turns one input pixel (all channels)
// into one output pixel, which is sent as 128-bit flits straight into the
// memory of the tile that holds the next layer. Tiles in auto mode start as
// soon as enough of the previous layer's output has arrived, so layers and
// images overlap.
//
// Host interface: a configuration bus (cfg_*) addressed by tile number
// (y*MESH_X + x) carries register writes, crossbar row programming, tile
// memory writes and start commands (see tile for the map). rd_* reads a
// word of a tile's output register (rd_data valid two clocks after rd_*).
// tile_busy/tile_done show each tile's state. The counters report how often
// the network bypassed a router, tiles waited for their inputs, a pooling
// window was still open, and flits were sent.
//
// The host bus and the counters are this design's; everything else follows
// the architecture, as detailed in the instantiated modules.
module node_top import pim_pkg::*; #(
  parameter int MESH_X = 16,
  parameter int MESH_Y = 20,
  parameter int CORES  = 12,
  parameter int DEPTH  = 4,
  localparam int N     = MESH_X * MESH_Y,
  localparam int TW    = $clog2(N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_valid,
  input  logic [TW-1:0]         cfg_tile,
  input  cfg_op_e               cfg_op,
  input  logic [15:0]           cfg_addr,
  input  logic [CFG_DATA_W-1:0] cfg_data,
  input  logic [TW-1:0]         rd_tile,
  input  logic [9:0]            rd_addr,
  output logic [DATA_W-1:0]     rd_data,
  output logic [N-1:0]          tile_busy,
  output logic [N-1:0]          tile_done,
  output logic [31:0]           bypass_count,
  output logic [31:0]           wait_count,
  output logic [31:0]           pool_hold_count,
  output logic [31:0]           flit_count
);
  logic [N-1:0] inj_valid, inj_ready, ej_valid, ej_ready;
  flit_t        inj_flit [N];
  flit_t        ej_flit  [N];
  logic [N-1:0] ev_wait, ev_pool, ev_sent;
  logic [DATA_W-1:0] t_rd [N];
  logic [TW-1:0]     rd_tile_q;

  mesh_noc #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .DEPTH(DEPTH)) u_noc (
    .clk, .rst_n, .inj_valid, .inj_flit, .inj_ready, .ej_valid, .ej_flit, .ej_ready,
    .bypass_count);

  for (genvar t = 0; t < N; t++) begin : g_tile
    tile #(.CORES(CORES)) u_tile (
      .clk, .rst_n,
      .cfg_valid(cfg_valid && cfg_tile == t), .cfg_op, .cfg_addr, .cfg_data,
      .busy(tile_busy[t]), .done(tile_done[t]), .rd_addr, .rd_data(t_rd[t]),
      .inj_valid(inj_valid[t]), .inj_flit(inj_flit[t]), .inj_ready(inj_ready[t]),
      .ej_valid(ej_valid[t]), .ej_flit(ej_flit[t]), .ej_ready(ej_ready[t]),
      .ev_wait(ev_wait[t]), .ev_pool_hold(ev_pool[t]), .ev_sent(ev_sent[t]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rd_tile_q <= '0; rd_data <= '0;
      wait_count <= '0; pool_hold_count <= '0; flit_count <= '0;
    end else begin
      rd_tile_q       <= rd_tile;
      rd_data         <= t_rd[rd_tile_q];
      wait_count      <= wait_count + 32'($countones(ev_wait));
      pool_hold_count <= pool_hold_count + 32'($countones(ev_pool));
      flit_count      <= flit_count + 32'($countones(ev_sent));
    end
endmodule
