// tb_lut_const_mult: checks the LUT-based constant multiplier.
//  * The INIT values generated for the weight pair (1, -3) equal the four
//    published contents 64'hfffe_0000_fffe_0000, 64'h07fe_0000_f83e_0000,
//    64'h39c6_ff00_5a5a_f0f0 and 64'hcccc_cccc_aaaa_aaaa.
//  * A multiplier holding (1, -3) reproduces the 16-row product table
//    (e.g. 11 * -3 = 8'b11011111).
//  * Every 4-bit weight pair (w, -1 - w) and a set of 8-bit weight pairs give
//    act * w for all 16 activations and both weight-select values.
module tb_lut_const_mult;
  int checks = 0, failures = 0;
  logic [3:0] act;
  logic       ws;

  logic signed [7:0]  p_paper;
  lut_const_mult #(.WBITS(4), .W0(1), .W1(-3)) u_paper (.act(act), .ws(ws), .prod(p_paper));

  logic signed [7:0]  p4 [16];
  for (genvar w = 0; w < 16; w++) begin : g4
    lut_const_mult #(.WBITS(4), .W0(w - 8), .W1(7 - w)) u (.act(act), .ws(ws), .prod(p4[w]));
  end

  localparam int W8A [6] = '{-128, 127, -77, 45, 0, -1};
  localparam int W8B [6] = '{127, -128, 99, -2, 64, 1};
  logic signed [11:0] p8 [6];
  for (genvar k = 0; k < 6; k++) begin : g8
    lut_const_mult #(.WBITS(8), .W0(W8A[k]), .W1(W8B[k])) u (.act(act), .ws(ws), .prod(p8[k]));
  end

  // Published product table for weight -3 (two's complement int8).
  localparam logic [7:0] TAB_M3 [16] = '{8'b00000000, 8'b11111101, 8'b11111010, 8'b11110111,
                                          8'b11110100, 8'b11110001, 8'b11101110, 8'b11101011,
                                          8'b11101000, 8'b11100101, 8'b11100010, 8'b11011111,
                                          8'b11011100, 8'b11011001, 8'b11010110, 8'b11010011};
  localparam logic [63:0] INIT_PAPER [4] = '{64'hcccc_cccc_aaaa_aaaa, 64'h39c6_ff00_5a5a_f0f0,
                                             64'h07fe_0000_f83e_0000, 64'hfffe_0000_fffe_0000};

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("tb_lut_const_mult: %s act=%0d ws=%0d got %0d exp %0d",
                                  what, act, ws, got, exp);
    end
  endtask

  initial begin
    for (int p = 0; p < 4; p++) begin
      checks++;
      if (lutmul_pkg::lut_init(1, -3, p) !== INIT_PAPER[p]) begin
        failures++;
        $display("tb_lut_const_mult: INIT of LUT #%0d is %h", p, lutmul_pkg::lut_init(1, -3, p));
      end
    end
    for (int s = 0; s < 2; s++) begin
      for (int a = 0; a < 16; a++) begin
        act = 4'(a);
        ws  = s[0];
        #1;
        chk(int'(p_paper), s ? int'(signed'(TAB_M3[a])) : a, "paper pair");
        for (int w = 0; w < 16; w++) chk(int'(p4[w]), a * (s ? 7 - w : w - 8), "int4");
        for (int k = 0; k < 6; k++)  chk(int'(p8[k]), a * (s ? W8B[k] : W8A[k]), "int8");
      end
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
