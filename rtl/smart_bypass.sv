// smart_bypass: the SMART logic of one router for one direction of travel
// (for example eastbound: flits arriving from the west neighbour, leaving to
// the east neighbour).
//
// Every clock, a router whose local switch allocation picked a buffered flit
// for this output sends a setup request (SSR) carrying the number of straight
// hops the flit wants (to its turn or destination, at most HPC_MAX). SSRs
// travel with the link; entry k of the vector comes from the router k+1 hops
// upstream. From them this unit decides, in the same clock:
//   * which flit arrives here: the nearest SSR whose hop count reaches here;
//   * whether it stops (its hop count ends here, or this router's own local
//     flit wants the same output: local flits have priority over bypassing
//     ones) or bypasses this router through the bypass multiplexer;
//   * the outgoing SSR vector: this router's own SSR in entry 0 and, only
//     for a flit that bypasses, its SSR moved one entry further. SSRs of
//     flits that stop here are dropped, so routers downstream never wait for
//     a flit that will not come.
// A flit that stops is written into this router's input buffer if it has
// room. acc_up tells the sender whether its flit was taken: a bypassing
// router passes on the answer from downstream, a stopping router answers with
// its buffer state. A sender only removes its flit when accepted.
//
// Local-over-bypass and nearest-SSR-first are the two priorities SMART
// needs; stopping at every turn (SMART-1D) and the accept path are this
// design's choices. Combinational.
module smart_bypass import pim_pkg::*; (
  input  link_t             in,          // from the upstream neighbour
  input  logic              acc_dn,      // accept from the downstream neighbour
  input  logic              local_req,   // a local flit wants this output
  input  flit_t             local_flit,
  input  logic [HOPS_W-1:0] local_hops,  // 1..HPC_MAX
  input  logic              buf_full,    // input buffer of this direction
  output link_t             out,         // to the downstream neighbour
  output logic              acc_up,      // accept to the upstream neighbour
  output logic              push,        // write the arriving flit into the buffer
  output logic              local_go,    // the local flit leaves this clock
  output logic              bypass       // an upstream flit passes this router
);
  logic                      arr, stop;
  logic [$clog2(HPC_MAX)-1:0] arr_k;

  always_comb begin
    arr   = 1'b0;
    arr_k = '0;
    for (int k = HPC_MAX - 1; k >= 0; k--)
      if (in.valid && in.ssr[k].valid && int'(in.ssr[k].hops) >= k + 1) begin
        arr   = 1'b1;
        arr_k = ($clog2(HPC_MAX))'(k);
      end
    bypass = arr && int'(in.ssr[arr_k].hops) > int'(arr_k) + 1 && !local_req;
    stop   = arr && !bypass;
  end

  // Forward path (flit and SSRs) and backward path (accept) are kept in
  // separate processes: the accept depends on downstream routers, the flit
  // only on upstream ones.
  always_comb begin
    out.valid = local_req || bypass;
    out.flit  = local_req ? local_flit : in.flit;
    out.ssr   = '0;
    out.ssr[0].valid = local_req;
    out.ssr[0].hops  = local_hops;
    if (bypass) out.ssr[arr_k + 1'b1] = in.ssr[arr_k];
  end

  assign push     = stop && !buf_full;
  assign acc_up   = bypass ? acc_dn : (stop && !buf_full);
  assign local_go = local_req && acc_dn;
endmodule
