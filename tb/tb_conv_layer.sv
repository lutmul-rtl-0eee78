// tb_conv_layer: end-to-end check of a convolution layer (window generator +
// LUT matrix-vector unit) against a direct convolution computed here:
// a standard 3x3 stride-1 "same" convolution, 3 -> 4 channels, on 5x6
// frames, two frames back to back, with random input gaps and output stalls.
// Thresholds are the layer's defaults, recomputed from the same generator
// functions; the convolution arithmetic is independent of the design.
module tb_conv_layer;
  localparam int H = 5, W = 6, CIN = 3, COUT = 4, K = 3, S = 1, P = 1, SEED = 9, NF = 2;
  localparam int NPROD = K*K*CIN, NT = 15;
  localparam int STEP = lutmul_pkg::th_step(NPROD, 4, 4);
  localparam logic [COUT*NPROD*4-1:0] WTS = (COUT*NPROD*4)'(lutmul_pkg::gen_weights(SEED, COUT*NPROD, 4));
  localparam logic [COUT*NT*32-1:0] THS = (COUT*NT*32)'(lutmul_pkg::gen_thresholds(SEED, COUT, NT, STEP));

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0, pad_mon, ws_mon;
  logic [CIN*4-1:0]  in_data = '0;
  logic [COUT*4-1:0] out_data;
  int checks = 0, failures = 0, nout = 0, npad = 0;

  conv_layer #(.H(H), .W(W), .CIN(CIN), .COUT(COUT), .K(K), .S(S), .P(P), .SEED(SEED)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .padded_mon(pad_mon), .ws_mon(ws_mon));

  logic [3:0] img [NF][H][W][CIN];
  logic [COUT*4-1:0] expq [$];

  initial begin
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          for (int ch = 0; ch < CIN; ch++) img[f][r][c][ch] = 4'($urandom);
    for (int f = 0; f < NF; f++)
      for (int oy = 0; oy < H; oy++)
        for (int ox = 0; ox < W; ox++) begin
          logic [COUT*4-1:0] e;
          for (int co = 0; co < COUT; co++) begin
            int acc, cnt;
            acc = 0;
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                for (int ci = 0; ci < CIN; ci++) begin
                  int r, c, w;
                  r = oy*S - P + ky;
                  c = ox*S - P + kx;
                  w = int'(WTS[(co*NPROD + (ky*K + kx)*CIN + ci)*4 +: 4]);
                  if (w >= 8) w -= 16;
                  if (r >= 0 && r < H && c >= 0 && c < W) acc += w * int'(img[f][r][c][ci]);
                end
            cnt = 0;
            for (int k = 0; k < NT; k++) if (acc >= int'(signed'(THS[(co*NT + k)*32 +: 32]))) cnt++;
            e[co*4 +: 4] = 4'(cnt);
          end
          expq.push_back(e);
        end
  end

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_data !== expq.pop_front()) begin
        failures++;
        if (failures < 5) $display("tb_conv_layer: pixel %0d wrong", nout);
      end
      nout++;
    end
    if (pad_mon) npad++;
  end

  always @(negedge clk) out_ready <= ($urandom % 3) != 0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n <= 1'b1;
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          while (($urandom % 4) == 0) begin in_valid <= 1'b0; @(negedge clk); end
          in_valid <= 1'b1;
          for (int ch = 0; ch < CIN; ch++) in_data[ch*4 +: 4] <= img[f][r][c][ch];
          forever begin
            bit taken;
            #1 taken = in_ready;
            @(negedge clk);
            if (taken) break;
          end
        end
    in_valid <= 1'b0;
    while (nout < NF*H*W) @(negedge clk);
    repeat (10) @(negedge clk);
    checks += 2;
    if (out_valid) failures++;
    // Border windows of a 5x6 frame: 2*6 + 2*3 = 18 per frame.
    if (npad != NF * 18) begin failures++; $display("tb_conv_layer: %0d padded windows", npad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
