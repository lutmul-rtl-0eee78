// tb_lut6_2: checks both outputs of the dual-output LUT model for all 64
// input combinations and three table contents, including the sign-bit table
// of the weight pair (1, -3).
module tb_lut6_2;
  localparam logic [63:0] I0 = 64'hfffe_0000_fffe_0000;
  localparam logic [63:0] I1 = 64'h39c6_ff00_5a5a_f0f0;
  localparam logic [63:0] I2 = 64'h0123_4567_89ab_cdef;
  logic [5:0] i;
  logic a6, a5, b6, b5, c6, c5;
  int checks = 0, failures = 0;

  lut6_2 #(.INIT(I0)) u0 (.i(i), .o6(a6), .o5(a5));
  lut6_2 #(.INIT(I1)) u1 (.i(i), .o6(b6), .o5(b5));
  lut6_2 #(.INIT(I2)) u2 (.i(i), .o6(c6), .o5(c5));

  task automatic chk(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("tb_lut6_2: %s at i=%0d got %b exp %b", what, i, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 64; n++) begin
      i = 6'(n);
      #1;
      chk(a6, I0[n], "O6"); chk(a5, I0[n % 32], "O5");
      chk(b6, I1[n], "O6"); chk(b5, I1[n % 32], "O5");
      chk(c6, I2[n], "O6"); chk(c5, I2[n % 32], "O5");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
