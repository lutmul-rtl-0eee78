// tb_conv_generator: sliding-window generator in the shapes the accelerator
// uses: 3x3 stride 1 with padding (depthwise, checked for rate too), 3x3
// stride 2 with padding, 1x1 pointwise, 2x2/2 pooling windows with an unused
// last row, and a whole-frame (global pooling) window. Random stalls on both
// sides except in the rate run; several frames back to back.
module tb_conv_generator;
  logic d [5];
  int   c [5], f [5], p [5];

  conv_gen_harness #(.H(6), .W(7), .C(3), .K(3), .S(1), .P(1), .STALLS(1'b0))
    h0 (.done(d[0]), .checks(c[0]), .failures(f[0]), .padded(p[0]));
  conv_gen_harness #(.H(5), .W(6), .C(2), .K(3), .S(2), .P(1))
    h1 (.done(d[1]), .checks(c[1]), .failures(f[1]), .padded(p[1]));
  conv_gen_harness #(.H(3), .W(4), .C(4), .K(1), .S(1), .P(0))
    h2 (.done(d[2]), .checks(c[2]), .failures(f[2]), .padded(p[2]));
  conv_gen_harness #(.H(7), .W(6), .C(2), .K(2), .S(2), .P(0))
    h3 (.done(d[3]), .checks(c[3]), .failures(f[3]), .padded(p[3]));
  conv_gen_harness #(.H(4), .W(4), .C(2), .K(4), .S(4), .P(0))
    h4 (.done(d[4]), .checks(c[4]), .failures(f[4]), .padded(p[4]));

  initial begin
    int checks, failures;
    #1 wait (d[0] && d[1] && d[2] && d[3] && d[4]);
    checks = 0; failures = 0;
    for (int i = 0; i < 5; i++) begin checks += c[i]; failures += f[i]; end
    // Padded windows must appear exactly where padding exists.
    checks += 2;
    if (p[0] == 0 || p[1] == 0) failures++;
    if (p[2] != 0 || p[3] != 0 || p[4] != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3] + c[4], 1);
    $finish;
  end
endmodule
