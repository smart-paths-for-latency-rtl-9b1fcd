// smart_router: mesh router with XY routing and SMART single-cycle
// multi-hop bypass, one per tile.
//
// Five input buffers (index = direction of travel of the flits in it: from
// the west neighbour = eastbound, ..., local injection) hold single-flit
// packets. Each clock:
//  1. local switch allocation: every output port (E, W, N, S, local eject)
//     grants one buffered head flit routed to it (XY: first X, then Y),
//     round robin among the buffers;
//  2. for E/W/N/S, a smart_bypass unit sends the winner's SSR, resolves the
//     flits arriving from upstream (stop here or bypass) and drives the link;
//  3. a granted flit leaves when the router where it will stop accepts it,
//     possibly several hops away, in the same clock.
// The flit crosses bypassed routers combinationally, which is what SMART's
// repeated wires allow (up to HPC_MAX hops per clock). A flit arriving at its
// destination router is buffered and ejected to the tile in a later clock.
//
// Coordinates are inputs, so that all routers share one module. Buffer depth
// and the single-flit packets are this design's choices; routing, link width
// and flow control follow the architecture.
module smart_router import pim_pkg::*; #(
  parameter int DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  // links: in_X arrives from neighbour X, out_X leaves to neighbour X
  input  link_t              in_e, in_w, in_n, in_s,
  output link_t              out_e, out_w, out_n, out_s,
  // accept for flits we send to neighbour X / accept we give to neighbour X
  input  logic               acc_in_e, acc_in_w, acc_in_n, acc_in_s,
  output logic               acc_out_e, acc_out_w, acc_out_n, acc_out_s,
  // tile side
  input  logic               inj_valid,
  input  flit_t              inj_flit,
  output logic               inj_ready,
  output logic               ej_valid,
  output flit_t              ej_flit,
  input  logic               ej_ready,
  // event counters for the testbenches (bypasses this clock, per direction)
  output logic [3:0]         bypass_now
);
  localparam int NP = 5;

  flit_t             head [NP];
  logic [NP-1:0]     hv, full, pop, push;
  flit_t             push_flit [NP];
  dir_e              route [NP];

  logic [3:0]        local_go;

  // ---------------- input buffers ----------------
  for (genvar p = 0; p < NP; p++) begin : g_buf
    flit_fifo #(.DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n, .push(push[p]), .push_flit(push_flit[p]), .pop(pop[p]),
      .head(head[p]), .head_valid(hv[p]), .full(full[p]));
  end
  assign push[int'(DIR_L)]      = inj_valid && !full[int'(DIR_L)];
  assign push_flit[int'(DIR_L)] = inj_flit;
  assign inj_ready        = !full[int'(DIR_L)];

  // ---------------- XY route of each head ----------------
  always_comb
    for (int p = 0; p < NP; p++) begin
      if (head[p].x > my_x)      route[p] = DIR_E;
      else if (head[p].x < my_x) route[p] = DIR_W;
      else if (head[p].y > my_y) route[p] = DIR_N;
      else if (head[p].y < my_y) route[p] = DIR_S;
      else                       route[p] = DIR_L;
    end

  // ---------------- local switch allocation (round robin) ----------------
  logic [2:0]         rr [NP];     // per output: buffer with highest priority
  logic [NP-1:0]      oreq;        // output has a local winner
  logic [2:0]         gnt [NP];    // per output: granted buffer
  logic [HOPS_W-1:0]  lhops [4];

  always_comb
    for (int o = 0; o < NP; o++) begin
      oreq[o] = 1'b0;
      gnt[o]  = '0;
      for (int i = NP - 1; i >= 0; i--) begin
        int b;
        b = (int'(rr[o]) + i) % NP;
        if (hv[b] && route[b] == dir_e'(o)) begin
          oreq[o] = 1'b1;
          gnt[o]  = 3'(b);
        end
      end
    end

  function automatic logic [HOPS_W-1:0] cap(input int h);
    return (h > HPC_MAX) ? HOPS_W'(HPC_MAX) : HOPS_W'(h);
  endfunction

  always_comb begin
    lhops[int'(DIR_E)] = cap(int'(head[gnt[int'(DIR_E)]].x) - int'(my_x));
    lhops[int'(DIR_W)] = cap(int'(my_x) - int'(head[gnt[int'(DIR_W)]].x));
    lhops[int'(DIR_N)] = cap(int'(head[gnt[int'(DIR_N)]].y) - int'(my_y));
    lhops[int'(DIR_S)] = cap(int'(my_y) - int'(head[gnt[int'(DIR_S)]].y));
  end

  // ---------------- SMART bypass per direction ----------------
  // One unit per direction of travel, each with its own signals so that the
  // chains of bypassing routers stay visibly free of loops.
  smart_bypass u_byp_e (
    .in(in_w), .acc_dn(acc_in_e), .local_req(oreq[int'(DIR_E)]), .local_flit(head[gnt[int'(DIR_E)]]),
    .local_hops(lhops[int'(DIR_E)]), .buf_full(full[int'(DIR_E)]), .out(out_e), .acc_up(acc_out_w),
    .push(push[int'(DIR_E)]), .local_go(local_go[int'(DIR_E)]), .bypass(bypass_now[int'(DIR_E)]));
  smart_bypass u_byp_w (
    .in(in_e), .acc_dn(acc_in_w), .local_req(oreq[int'(DIR_W)]), .local_flit(head[gnt[int'(DIR_W)]]),
    .local_hops(lhops[int'(DIR_W)]), .buf_full(full[int'(DIR_W)]), .out(out_w), .acc_up(acc_out_e),
    .push(push[int'(DIR_W)]), .local_go(local_go[int'(DIR_W)]), .bypass(bypass_now[int'(DIR_W)]));
  smart_bypass u_byp_n (
    .in(in_s), .acc_dn(acc_in_n), .local_req(oreq[int'(DIR_N)]), .local_flit(head[gnt[int'(DIR_N)]]),
    .local_hops(lhops[int'(DIR_N)]), .buf_full(full[int'(DIR_N)]), .out(out_n), .acc_up(acc_out_s),
    .push(push[int'(DIR_N)]), .local_go(local_go[int'(DIR_N)]), .bypass(bypass_now[int'(DIR_N)]));
  smart_bypass u_byp_s (
    .in(in_n), .acc_dn(acc_in_s), .local_req(oreq[int'(DIR_S)]), .local_flit(head[gnt[int'(DIR_S)]]),
    .local_hops(lhops[int'(DIR_S)]), .buf_full(full[int'(DIR_S)]), .out(out_s), .acc_up(acc_out_n),
    .push(push[int'(DIR_S)]), .local_go(local_go[int'(DIR_S)]), .bypass(bypass_now[int'(DIR_S)]));
  assign push_flit[int'(DIR_E)] = in_w.flit;
  assign push_flit[int'(DIR_W)] = in_e.flit;
  assign push_flit[int'(DIR_N)] = in_s.flit;
  assign push_flit[int'(DIR_S)] = in_n.flit;

  // ---------------- ejection ----------------
  assign ej_valid = oreq[int'(DIR_L)];
  assign ej_flit  = head[gnt[int'(DIR_L)]];

  // ---------------- pops and round-robin update ----------------
  always_comb begin
    pop = '0;
    for (int o = 0; o < 4; o++)
      if (oreq[o] && local_go[o]) pop[gnt[o]] = 1'b1;
    if (oreq[int'(DIR_L)] && ej_ready) pop[gnt[int'(DIR_L)]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int o = 0; o < NP; o++) rr[o] <= '0;
    end else begin
      for (int o = 0; o < NP; o++)
        if (oreq[o] && pop[gnt[o]]) rr[o] <= (gnt[o] == 3'(NP - 1)) ? '0 : gnt[o] + 1'b1;
    end
endmodule
