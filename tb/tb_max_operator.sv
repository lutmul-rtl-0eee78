// tb_max_operator: per-channel maximum of random 3x3 windows of 5 channels,
// one-cycle latency, and that a stalled output holds its value.
module tb_max_operator;
  localparam int N = 9, C = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1;
  logic [N*C*4-1:0] in_data = '0;
  logic [C*4-1:0]   out_data;
  int checks = 0, failures = 0, nout = 0;
  logic [C*4-1:0] expq [$];

  max_operator #(.N(N), .C(C)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
    .in_ready(in_ready), .in_data(in_data), .out_valid(out_valid), .out_ready(out_ready),
    .out_data(out_data));

  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      logic [C*4-1:0] e;
      for (int c = 0; c < C; c++) begin
        int m;
        m = 0;
        for (int n = 0; n < N; n++) if (int'(in_data[(n*C + c)*4 +: 4]) > m) m = int'(in_data[(n*C + c)*4 +: 4]);
        e[c*4 +: 4] = 4'(m);
      end
      expq.push_back(e);
    end
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_data !== expq.pop_front()) begin failures++; $display("tb_max_operator: wrong max"); end
      nout++;
    end
  end

  always @(negedge clk) out_ready <= ($urandom % 5) != 3;

  initial begin
    repeat (2) @(negedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 200; i++) begin
      in_valid <= 1'b1;
      for (int n = 0; n < N*C; n++) in_data[n*4 +: 4] <= 4'($urandom % ((i % 4) == 0 ? 16 : 9));
      forever begin
        bit taken;
        #1 taken = in_ready;
        @(negedge clk);
        if (taken) break;
      end
    end
    in_valid <= 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (nout != 200) begin failures++; $display("tb_max_operator: %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
