// flit_fifo: input buffer of one router port, a DEPTH-entry first-in
// first-out queue of flits. head/head_valid show the oldest entry; pop
// removes it, push appends (both may happen in one clock). full is the
// registered state (a push is only offered when not full).
module flit_fifo import pim_pkg::*; #(
  parameter int DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push,
  input  flit_t push_flit,
  input  logic  pop,
  output flit_t head,
  output logic  head_valid,
  output logic  full
);
  localparam int PW = $clog2(DEPTH);
  flit_t        q [DEPTH];
  logic [PW-1:0] rp, wp;
  logic [PW:0]   cnt;

  assign head       = q[rp];
  assign head_valid = (cnt != 0);
  assign full       = (cnt == (PW+1)'(DEPTH));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (push) begin
        q[wp] <= push_flit;
        wp    <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
    end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("flit_fifo: push into full buffer");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && !head_valid))
    else $error("flit_fifo: pop from empty buffer");
endmodule
