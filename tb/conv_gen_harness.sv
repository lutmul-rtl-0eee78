// conv_gen_harness: drives one conv_generator configuration with NF random
// frames and compares every window with one cut from a stored copy of the
// frame (zero outside the image). With STALLS = 0 the input is always valid
// and the output always ready and the harness also checks the rate: all
// windows of NF frames within NF*(H*W + 2*W + 3) cycles of the first one.
module conv_gen_harness #(
  parameter int H = 5,
  parameter int W = 6,
  parameter int C = 2,
  parameter int K = 3,
  parameter int S = 2,
  parameter int P = 1,
  parameter int NF = 3,
  parameter bit STALLS = 1'b1
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   padded
);
  localparam int OH = (H + 2*P - K) / S + 1;
  localparam int OW = (W + 2*P - K) / S + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0, out_padded;
  logic [C*4-1:0]     in_data = '0;
  logic [K*K*C*4-1:0] out_data;

  conv_generator #(.H(H), .W(W), .C(C), .K(K), .S(S), .P(P)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data), .out_padded(out_padded));

  logic [C*4-1:0] frame [NF][H][W];
  logic [K*K*C*4-1:0] expq [$];
  bit               padq [$];
  int cyc = 0, nout = 0, first_out = -1, last_out = -1;

  initial begin
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) frame[f][r][c] = (C*4)'({$urandom, $urandom});
    for (int f = 0; f < NF; f++)
      for (int oy = 0; oy < OH; oy++)
        for (int ox = 0; ox < OW; ox++) begin
          logic [K*K*C*4-1:0] win;
          bit pd;
          pd = 1'b0;
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++) begin
              int r, c;
              r = oy*S - P + ky;
              c = ox*S - P + kx;
              if (r < 0 || r >= H || c < 0 || c >= W) begin
                win[(ky*K + kx)*C*4 +: C*4] = '0;
                pd = 1'b1;
              end else win[(ky*K + kx)*C*4 +: C*4] = frame[f][r][c];
            end
          expq.push_back(win);
          padq.push_back(pd);
        end
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready) begin
      checks += 2;
      if (out_data !== expq.pop_front()) begin
        failures++;
        if (failures < 5) $display("conv_gen_harness K=%0d S=%0d: window %0d wrong", K, S, nout);
      end
      if (out_padded !== padq.pop_front()) failures++;
      if (out_padded) padded++;
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      nout++;
    end
  end

  always @(negedge clk) out_ready <= STALLS ? (($urandom % 3) != 0) : 1'b1;

  initial begin
    done = 1'b0; checks = 0; failures = 0; padded = 0;
    repeat (2) @(negedge clk);
    rst_n <= 1'b1;
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          if (STALLS) while (($urandom % 4) == 0) begin in_valid <= 1'b0; @(negedge clk); end
          in_valid <= 1'b1;
          in_data  <= frame[f][r][c];
          forever begin
            bit taken;
            #1 taken = in_ready;
            @(negedge clk);
            if (taken) break;
          end
        end
    in_valid <= 1'b0;
    while (nout < NF*OH*OW) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (nout != NF*OH*OW || out_valid) begin failures++; $display("conv_gen_harness: extra windows"); end
    if (!STALLS) begin
      checks++;
      if (last_out - first_out > NF*(H*W + 2*W + 3)) begin
        failures++;
        $display("conv_gen_harness: %0d frames took %0d cycles", NF, last_out - first_out);
      end
    end
    done = 1'b1;
  end
endmodule
