// tb_sigmoid_unit: sweeps the whole signed Q8.8 input range and compares the
// output with 1/(1+exp(-x)); the piecewise-linear approximation must stay
// within 0.025 (the approximation error of about 0.019 plus truncation), be monotonic and symmetric
// (y(-x) = 1 - y(x)).
module tb_sigmoid_unit;
  logic signed [15:0] x;
  logic [15:0] y, yprev;
  int checks = 0, failures = 0;
  real r, e;

  sigmoid_unit dut (.x, .y);
  initial begin
    yprev = '0;
    for (int v = -32768; v < 32768; v += 7) begin
      x = 16'(v);
      #1;
      r = real'(v) / 256.0;
      e = 1.0 / (1.0 + $exp(-r));
      checks++;
      if ((real'(y) / 256.0 - e) > 0.025 || (e - real'(y) / 256.0) > 0.025) begin
        failures++;
        if (failures < 5) $display("x=%f y=%0d expected %f", r, y, e * 256.0);
      end
      checks++;
      if (y < yprev) failures++;
      yprev = y;
    end
    for (int v = 1; v < 4000; v += 13) begin
      logic [15:0] yp;
      x = 16'(v); #1; yp = y;
      x = 16'(-v); #1;
      checks++;
      if (int'(y) + int'(yp) != 256) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
