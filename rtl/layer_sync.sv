// layer_sync: inter-layer and batch pipelining control of one layer.
//
// A layer need not wait for the whole output of the previous layer: with the
// kernel striding row by row, its first window is complete once
//   valuesWait = (w*(l-1) + l) * n
// values have arrived (w: IFM width, l: kernel size, n: values per pixel),
// i.e. cyclesWait = w*(l-1) + l pixels. Every later pixel needs n more
// values. go is high when the next pixel may start; pix_start consumes it.
// For batch pipelining a layer works on one image at a time: after the h*w-th
// pixel of an image has started, the count of that image's values is removed
// and the next image is gated the same way. Values of the next image that
// arrive early are kept in the count. The formulas follow the architecture;
// the interface is this design's.
module layer_sync #(
  parameter int CNT_W = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [9:0]       w,          // IFM width
  input  logic [9:0]       h,          // IFM height
  input  logic [3:0]       l,          // kernel size
  input  logic [11:0]      n,          // values per pixel
  input  logic [3:0]       value_cnt,  // values arriving this clock
  input  logic             pix_start,  // the layer starts a pixel (only when go)
  output logic             go,
  output logic [CNT_W-1:0] cycles_wait,
  output logic [CNT_W-1:0] values_wait,
  output logic [15:0]      images_done
);
  logic [CNT_W-1:0] recv, started, need, pix_total, img_values;

  always_comb begin
    cycles_wait = CNT_W'(w) * CNT_W'(l - 4'd1) + CNT_W'(l);
    values_wait = cycles_wait * CNT_W'(n);
    pix_total   = CNT_W'(w) * CNT_W'(h);
    img_values  = pix_total * CNT_W'(n);
    need        = values_wait + started * CNT_W'(n);
    if (need > img_values) need = img_values;
    go          = (recv >= need) && (started < pix_total);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      recv <= '0; started <= '0; images_done <= '0;
    end else begin
      if (pix_start && go && started + 1'b1 == pix_total) begin
        recv        <= recv + CNT_W'(value_cnt) - img_values;
        started     <= '0;
        images_done <= images_done + 1'b1;
      end else begin
        recv <= recv + CNT_W'(value_cnt);
        if (pix_start && go) started <= started + 1'b1;
      end
    end

  assert property (@(posedge clk) disable iff (!rst_n) pix_start |-> go)
    else $error("layer_sync: pixel started before its inputs arrived");
endmodule
