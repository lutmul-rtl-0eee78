// tb_stream_fifo: ordering, full/empty flags and occupancy of a depth-4 FIFO
// under random writes and reads, including filling it completely and a
// write that is refused while full.
module tb_stream_fifo;
  localparam int DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [15:0] in_data = '0, out_data;
  logic [2:0]  count;
  int checks = 0, failures = 0, model_cnt = 0, nfull = 0;
  bit hs = 1'b0;
  logic [15:0] q [$];

  stream_fifo #(.WIDTH(16), .DEPTH(DEPTH)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
    .in_ready(in_ready), .in_data(in_data), .out_valid(out_valid), .out_ready(out_ready),
    .out_data(out_data), .count(count));

  always @(posedge clk) begin
    if (rst_n) begin
      checks += 3;
      if (int'(count) != model_cnt) begin failures++; $display("tb_stream_fifo: count %0d exp %0d", count, model_cnt); end
      if (in_ready != (model_cnt < DEPTH)) failures++;
      if (out_valid != (model_cnt > 0)) failures++;
      if (model_cnt == DEPTH) nfull++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== q.pop_front()) begin failures++; $display("tb_stream_fifo: order"); end
        model_cnt--;
      end
      hs = in_valid && in_ready;
      if (hs) begin q.push_back(in_data); model_cnt++; end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      // Phases: fill-biased, drain-biased, mixed.
      case ((i / 50) % 3)
        0: begin out_ready <= ($urandom % 4) == 0; end
        1: begin out_ready <= ($urandom % 4) != 0; end
        default: out_ready <= $urandom % 2;
      endcase
      if (!in_valid || hs) begin
        in_valid <= ($urandom % 3) != 0;
        in_data  <= 16'($urandom);
      end
    end
    checks++;
    if (nfull == 0) begin failures++; $display("tb_stream_fifo: never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
