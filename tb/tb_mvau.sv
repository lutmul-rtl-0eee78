// tb_mvau: self-checking test of the LUT-based matrix-vector unit in three
// configurations: a fully parallel 1x1 layer with 32 inputs and 32 outputs
// (the size of the layer whose LUT cost is broken down for this design),
// a depthwise 3x3 layer over 8 channels, and an 8-bit-weight classifier with
// bias, 8-bit outputs and folding by two through the weight-select input.
module tb_mvau;
  logic d0, d1, d2;
  int   c0, c1, c2, f0, f1, f2;
  int   checks, failures;

  mvau_harness #(.IN_N(32), .COUT(32), .SEED(3)) h_dense (.done(d0), .checks(c0), .failures(f0));
  mvau_harness #(.IN_N(72), .COUT(8), .DEPTHWISE(1'b1), .DW_C(8), .SEED(5))
    h_dw (.done(d1), .checks(c1), .failures(f1));
  mvau_harness #(.WBITS(8), .IN_N(16), .COUT(10), .FOLD(2), .OBITS(8), .USE_BIAS(1'b1), .SEED(7))
    h_fc (.done(d2), .checks(c2), .failures(f2));

  initial begin
    #1 wait (d0 && d1 && d2);
    checks = c0 + c1 + c2;
    failures = f0 + f1 + f2;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    $display("tb_mvau: watchdog expired (done %b%b%b, checks %0d %0d %0d)", d0, d1, d2, c0, c1, c2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
