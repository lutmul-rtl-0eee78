// tb_adder_tree: checks the pipelined adder tree for N = 9 and N = 32: sums of
// random signed inputs, the latency of ceil(log2 N) cycles (4 and 5) at one
// sum per cycle, and that holding en low freezes the pipeline.
module tb_adder_tree;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, iv = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;

  logic signed [7:0]  d9 [9];
  logic signed [7:0]  d32 [32];
  logic signed [12:0] s9;
  logic signed [13:0] s32;
  logic               v9, v32;

  adder_tree #(.N(9),  .IW(8), .OW(13)) u9  (.clk(clk), .rst_n(rst_n), .en(en), .in_valid(iv),
                                             .in_data(d9),  .out_valid(v9),  .out_sum(s9));
  adder_tree #(.N(32), .IW(8), .OW(14)) u32 (.clk(clk), .rst_n(rst_n), .en(en), .in_valid(iv),
                                             .in_data(d32), .out_valid(v32), .out_sum(s32));

  int e9 [$];
  int e32 [$];
  int t9 [$];
  int t32 [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && en && iv) begin
      int a, b;
      a = 0; b = 0;
      foreach (d9[i]) a += int'(d9[i]);
      foreach (d32[i]) b += int'(d32[i]);
      e9.push_back(a); e32.push_back(b); t9.push_back(cyc); t32.push_back(cyc);
    end
    if (rst_n && en && v9) begin
      int lat;
      checks += 2;
      if (int'(s9) != e9.pop_front()) begin failures++; $display("tb_adder_tree: N=9 sum wrong"); end
      lat = cyc - t9.pop_front();
      // Cycles spent with en low add to the observed latency.
      if (lat != 4 && !stalled) begin failures++; $display("tb_adder_tree: N=9 latency %0d", lat); end
    end
    if (rst_n && en && v32) begin
      int lat;
      checks += 2;
      if (int'(s32) != e32.pop_front()) begin failures++; $display("tb_adder_tree: N=32 sum wrong"); end
      lat = cyc - t32.pop_front();
      if (lat != 5 && !stalled) begin failures++; $display("tb_adder_tree: N=32 latency %0d", lat); end
    end
  end

  bit stalled = 1'b0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    for (int n = 0; n < 60; n++) begin
      iv = 1'b1;
      foreach (d9[i])  d9[i]  = 8'($urandom);
      foreach (d32[i]) d32[i] = 8'($urandom);
      if (n == 30) begin
        // Stall: contents must not advance.
        stalled = 1'b1;
        en = 1'b0;
        repeat (4) @(negedge clk);
        en = 1'b1;
      end
      @(negedge clk);
    end
    iv = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (e9.size() != 0 || e32.size() != 0) begin failures++; $display("tb_adder_tree: %0d sums missing", e9.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
