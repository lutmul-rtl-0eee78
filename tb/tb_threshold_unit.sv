// tb_threshold_unit: checks the multi-threshold activation with explicit
// thresholds: outputs at, just below and just above every threshold, the
// per-phase channel selection of a folded unit and the bias addition.
module tb_threshold_unit;
  localparam int COUT = 4, NT = 15, AW = 12;
  // Channel c, threshold k: 10*(k-7) + 3*c.
  function automatic logic [COUT*NT*32-1:0] mk_th();
    logic [COUT*NT*32-1:0] v;
    for (int c = 0; c < COUT; c++)
      for (int k = 0; k < NT; k++) v[(c*NT + k)*32 +: 32] = 10 * (k - 7) + 3 * c;
    return v;
  endfunction
  localparam logic [COUT*NT*32-1:0] TH = mk_th();
  localparam logic [COUT*32-1:0] BI = {32'sd5, -32'sd7, 32'sd100, -32'sd1};

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1, iv = 1'b0, ph = 1'b0;
  always #5 clk = ~clk;
  logic signed [AW-1:0] acc1 [COUT];
  logic signed [AW-1:0] acc2 [COUT/2];
  logic [COUT*4-1:0]   o1;
  logic [COUT/2*4-1:0] o2;
  logic ov1, ov2, op1, op2;
  int checks = 0, failures = 0;

  threshold_unit #(.COUT(COUT), .FOLD(1), .AW(AW), .OBITS(4), .USE_BIAS(1'b0), .THRESHOLDS(TH))
    u1 (.clk(clk), .rst_n(rst_n), .en(en), .in_valid(iv), .in_phase(1'b0), .acc(acc1),
        .out_valid(ov1), .out_phase(op1), .out_act(o1));
  threshold_unit #(.COUT(COUT), .FOLD(2), .AW(AW), .OBITS(4), .USE_BIAS(1'b1), .THRESHOLDS(TH),
                   .BIAS(BI))
    u2 (.clk(clk), .rst_n(rst_n), .en(en), .in_valid(iv), .in_phase(ph), .acc(acc2),
        .out_valid(ov2), .out_phase(op2), .out_act(o2));

  function automatic int ref_cnt(input int v, input int c);
    int n;
    n = 0;
    for (int k = 0; k < NT; k++) if (v >= 10 * (k - 7) + 3 * c) n++;
    return n;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int v = -90; v <= 90; v++) begin
      int b;
      iv = 1'b1;
      ph = v[0];
      for (int c = 0; c < COUT; c++) acc1[c] = AW'(v);
      for (int p = 0; p < COUT/2; p++) acc2[p] = AW'(v + p);
      @(negedge clk);
      checks += 2;
      if (!ov1 || !ov2 || op2 !== ph) failures++;
      for (int c = 0; c < COUT; c++) begin
        checks++;
        if (int'(o1[c*4 +: 4]) != ref_cnt(v, c)) begin
          failures++;
          $display("tb_threshold_unit: v=%0d c=%0d got %0d", v, c, o1[c*4 +: 4]);
        end
      end
      for (int p = 0; p < COUT/2; p++) begin
        int ch;
        ch = p + (ph ? COUT/2 : 0);
        b = int'(signed'(BI[ch*32 +: 32]));
        checks++;
        if (int'(o2[p*4 +: 4]) != ref_cnt(v + p + b, ch)) begin
          failures++;
          $display("tb_threshold_unit: folded v=%0d ch=%0d got %0d", v, ch, o2[p*4 +: 4]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
