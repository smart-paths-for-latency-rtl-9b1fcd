// tb_smart_router: one router at (2,1) with its links driven by the
// testbench. Checks, clock by clock:
//  A  a local flit leaves east with an SSR of its hop count and is removed
//     only when accepted;
//  B  an upstream flit whose SSR asks to go further bypasses the router in
//     the same clock, its SSR moves one entry, the accept passes through;
//  C  with a local flit for the same output, the local flit wins and the
//     upstream flit stops in the input buffer, then leaves later;
//  D  a flit whose hop count ends here and whose destination is here is
//     buffered and ejected;
//  E  the nearest SSR decides which flit arrives.
module tb_smart_router;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0;
  link_t in_e, in_w, in_n, in_s, out_e, out_w, out_n, out_s;
  logic acc_in_e, acc_in_w, acc_in_n, acc_in_s, acc_out_e, acc_out_w, acc_out_n, acc_out_s;
  logic inj_valid, inj_ready, ej_valid, ej_ready;
  flit_t inj_flit, ej_flit;
  logic [3:0] bypass_now;
  int checks = 0, failures = 0;

  smart_router dut (.clk, .rst_n, .my_x(5'd2), .my_y(5'd1), .in_e, .in_w, .in_n, .in_s,
    .out_e, .out_w, .out_n, .out_s, .acc_in_e, .acc_in_w, .acc_in_n, .acc_in_s,
    .acc_out_e, .acc_out_w, .acc_out_n, .acc_out_s, .inj_valid, .inj_flit, .inj_ready,
    .ej_valid, .ej_flit, .ej_ready, .bypass_now);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic flit_t mk(input int x, input int y, input int tag);
    flit_t f;
    f.x = 5'(x); f.y = 5'(y); f.row = 12'(tag); f.data = {4{32'(tag)}};
    return f;
  endfunction

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL at %0t: %s", $time, what); end
  endtask

  task automatic tick; @(posedge clk); #1; endtask

  initial begin
    flit_t a, b, c2;
    in_e = '0; in_w = '0; in_n = '0; in_s = '0;
    acc_in_e = 1; acc_in_w = 1; acc_in_n = 1; acc_in_s = 1;
    inj_valid = 0; inj_flit = '0; ej_ready = 1;
    repeat (2) tick(); rst_n = 1; tick();

    // A: local flit to (5,1): 3 hops east; first refused, then accepted
    a = mk(5, 1, 11);
    inj_valid = 1; inj_flit = a; tick(); inj_valid = 0;
    acc_in_e = 0; #1;
    chk(out_e.valid && out_e.flit == a, "A: local flit on east link");
    chk(out_e.ssr[0].valid && out_e.ssr[0].hops == 5'd3, "A: SSR carries 3 hops");
    tick();
    chk(out_e.valid && out_e.flit == a, "A: flit kept while not accepted");
    acc_in_e = 1; tick();
    chk(!out_e.valid, "A: flit gone after accept");

    // B: upstream sender one hop west wants 5 hops: bypass
    b = mk(6, 1, 22);
    in_w.valid = 1; in_w.flit = b; in_w.ssr[0].valid = 1; in_w.ssr[0].hops = 5'd5;
    acc_in_e = 0; #1;
    chk(out_e.valid && out_e.flit == b && bypass_now[DIR_E], "B: bypass");
    chk(!out_e.ssr[0].valid && out_e.ssr[1].valid && out_e.ssr[1].hops == 5'd5, "B: SSR shifted");
    chk(acc_out_w == 1'b0, "B: refusal passed upstream");
    acc_in_e = 1; #1;
    chk(acc_out_w == 1'b1, "B: accept passed upstream");
    tick(); in_w = '0; #1;
    chk(!out_e.valid && !ej_valid, "B: nothing buffered");

    // C: local flit for east has priority over the bypassing one
    a = mk(4, 1, 33);
    acc_in_e = 0;
    inj_valid = 1; inj_flit = a; tick(); inj_valid = 0;
    b = mk(7, 1, 44);
    in_w.valid = 1; in_w.flit = b; in_w.ssr[0].valid = 1; in_w.ssr[0].hops = 5'd6;
    acc_in_e = 1; #1;
    chk(out_e.flit == a && out_e.ssr[0].hops == 5'd2 && !bypass_now[DIR_E], "C: local wins");
    chk(acc_out_w == 1'b1, "C: upstream flit accepted into buffer");
    chk(out_e.ssr[1].valid == 1'b0, "C: stopped flit's SSR not forwarded");
    tick(); in_w = '0; #1;
    chk(out_e.valid && out_e.flit == b && out_e.ssr[0].hops == 5'd5, "C: buffered flit leaves next");
    tick(); #1;
    chk(!out_e.valid, "C: empty");

    // D: flit for this router, one hop
    c2 = mk(2, 1, 55);
    in_w.valid = 1; in_w.flit = c2; in_w.ssr[0].valid = 1; in_w.ssr[0].hops = 5'd1; #1;
    chk(acc_out_w && !out_e.valid, "D: stops here");
    tick(); in_w = '0; #1;
    chk(ej_valid && ej_flit == c2, "D: ejected");
    tick(); #1;
    chk(!ej_valid, "D: ejected once");

    // E: two SSRs; the nearer (2 hops away, going 2 hops) arrives and stops
    c2 = mk(3, 1, 66);
    in_w.valid = 1; in_w.flit = c2;
    in_w.ssr[1].valid = 1; in_w.ssr[1].hops = 5'd2;
    in_w.ssr[4].valid = 1; in_w.ssr[4].hops = 5'd9; #1;
    chk(!bypass_now[DIR_E] && acc_out_w, "E: nearest SSR stops here");
    chk(!out_e.ssr[5].valid && !out_e.ssr[2].valid, "E: no SSR forwarded");
    tick(); in_w = '0; #1;
    chk(out_e.valid && out_e.flit == c2 && out_e.ssr[0].hops == 5'd1, "E: continues east 1 hop");
    tick();

    // north-bound turn: flit from (2,0) below going to (2,3)
    c2 = mk(2, 3, 77);
    in_s.valid = 1; in_s.flit = c2; in_s.ssr[0].valid = 1; in_s.ssr[0].hops = 5'd3; #1;
    chk(out_n.valid && out_n.flit == c2 && bypass_now[DIR_N], "N: bypass north");
    tick(); in_s = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
