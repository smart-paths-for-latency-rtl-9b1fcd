// tb_layer_sync: a 5 x 4 IFM with 3 x 3 kernel and 2 values per pixel.
// Values arrive at a random rate; the layer starts a pixel as soon as go
// allows. Checks that go rises exactly when (w*(l-1)+l)*n values are in for
// the first pixel and n more for each later one, that two images are
// processed one after the other, and the cyclesWait/valuesWait outputs.
module tb_layer_sync;
  localparam int W = 5, H = 4, L = 3, N = 2;
  logic clk = 0, rst_n = 0, pix_start, go;
  logic [3:0] value_cnt;
  logic [23:0] cycles_wait, values_wait;
  logic [15:0] images_done;
  int checks = 0, failures = 0;
  int recv, started, img, sent;

  layer_sync dut (.clk, .rst_n, .w(10'(W)), .h(10'(H)), .l(4'(L)), .n(12'(N)),
                  .value_cnt, .pix_start, .go, .cycles_wait, .values_wait, .images_done);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    value_cnt = 0; pix_start = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    checks += 2;
    if (cycles_wait != 24'(W * (L - 1) + L)) failures++;
    if (values_wait != 24'((W * (L - 1) + L) * N)) failures++;
    recv = 0; started = 0; img = 0; sent = 0;
    while (img < 2) begin
      int need, v;
      need = (W * (L - 1) + L) * N + started * N;
      if (need > W * H * N) need = W * H * N;
      checks++;
      if (go != (recv >= need)) begin
        failures++;
        $display("img %0d pix %0d recv %0d need %0d go %0d", img, started, recv, need, go);
      end
      pix_start = go && ($urandom_range(0, 3) != 0);
      v = (sent < 2 * W * H * N) ? $urandom_range(0, 3) : 0;
      value_cnt = 4'(v);
      @(posedge clk); #1;
      sent += v; recv += v;
      if (pix_start) begin
        started++;
        if (started == W * H) begin
          started = 0; img++; recv -= W * H * N;
        end
      end
      pix_start = 0; value_cnt = 0;
    end
    checks++;
    if (images_done != 16'd2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
