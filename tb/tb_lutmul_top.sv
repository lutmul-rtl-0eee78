// tb_lutmul_top: end-to-end test of the accelerator at its default size.
// NF random 14x14x32 frames are streamed back to back into the image port;
// each result vector is compared with a layer-by-layer integer model of the
// chain (pointwise conv, depthwise 3x3 conv with zero padding, pointwise
// conv, global max pool, fully connected layer with bias), each layer
// thresholded with its constants recomputed from the default generators.
// The result port is stalled at random. The test counts, and requires at
// least once each: a padded depthwise window, a folded classifier cycle with
// weight select 1, a stalled result, backpressure at the image port, and a
// FIFO holding more than one pixel. It also checks the frame rate: after the
// first result, one result per H*W pixels plus a small frame-change overhead.
module tb_lutmul_top;
  localparam int H = 14, W = 14, C0 = 32, C1 = 32, C2 = 16, NCL = 10, NF = 4;
  localparam int T4 = 15, T8 = 255;
  localparam int S1 = lutmul_pkg::th_step(C0, 4, 4);
  localparam int S2 = lutmul_pkg::th_step(9, 4, 4);
  localparam int S3 = lutmul_pkg::th_step(C1, 4, 4);
  localparam int S4 = lutmul_pkg::th_step(C2, 8, 8);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0, dw_pad, fc_ws;
  logic [C0*4-1:0]  in_data = '0;
  logic [NCL*8-1:0] out_data;
  logic [5:0]       fifo_cnt [4];

  lutmul_top dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .dw_padded_mon(dw_pad), .fc_ws_mon(fc_ws), .fifo_count_mon(fifo_cnt));

  lutmul_pkg::pbits_t w1, w2, w3, w4, t1, t2, t3, t4, b4;
  int checks = 0, failures = 0;
  int n_pad = 0, n_ws = 0, n_ostall = 0, n_bp = 0, n_fifo = 0, nres = 0;
  int cyc = 0;
  int res_cyc [$];
  logic [NCL*8-1:0] expq [$];
  logic [3:0] img [H][W][C0];

  function automatic int wt(input lutmul_pkg::pbits_t v, input int idx, input int bits);
    return lutmul_pkg::sext(v[idx*bits +: 32], bits);
  endfunction

  function automatic int thr(input lutmul_pkg::pbits_t t, input int ch, input int nt, input longint v);
    int n;
    n = 0;
    for (int k = 0; k < nt; k++) if (v >= longint'(signed'(t[(ch*nt + k)*32 +: 32]))) n++;
    return n;
  endfunction

  // Layer-by-layer model of one frame.
  task automatic model_frame();
    int a1 [H][W][C1];
    int a2 [H][W][C1];
    int a3 [H][W][C2];
    int pm [C2];
    logic [NCL*8-1:0] e;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        for (int o = 0; o < C1; o++) begin
          longint acc;
          acc = 0;
          for (int i = 0; i < C0; i++) acc += wt(w1, o*C0 + i, 4) * int'(img[r][c][i]);
          a1[r][c][o] = thr(t1, o, T4, acc);
        end
      end
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        for (int o = 0; o < C1; o++) begin
          longint acc;
          acc = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              if (r + ky - 1 >= 0 && r + ky - 1 < H && c + kx - 1 >= 0 && c + kx - 1 < W)
                acc += wt(w2, o*9 + ky*3 + kx, 4) * a1[r+ky-1][c+kx-1][o];
          a2[r][c][o] = thr(t2, o, T4, acc);
        end
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        for (int o = 0; o < C2; o++) begin
          longint acc;
          acc = 0;
          for (int i = 0; i < C1; i++) acc += wt(w3, o*C1 + i, 4) * a2[r][c][i];
          a3[r][c][o] = thr(t3, o, T4, acc);
        end
    for (int o = 0; o < C2; o++) begin
      pm[o] = 0;
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) if (a3[r][c][o] > pm[o]) pm[o] = a3[r][c][o];
    end
    for (int o = 0; o < NCL; o++) begin
      longint acc;
      acc = longint'(signed'(b4[o*32 +: 32]));
      for (int i = 0; i < C2; i++) acc += wt(w4, o*C2 + i, 8) * pm[i];
      e[o*8 +: 8] = 8'(thr(t4, o, T8, acc));
    end
    expq.push_back(e);
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dw_pad) n_pad++;
      if (fc_ws) n_ws++;
      if (out_valid && !out_ready) n_ostall++;
      if (in_valid && !in_ready) n_bp++;
      for (int i = 0; i < 4; i++) if (fifo_cnt[i] > 1) n_fifo++;
      if (out_valid && out_ready) begin
        checks++;
        if (expq.size() == 0 || out_data !== expq[0]) begin
          failures++;
          $display("tb_lutmul_top: result %0d got %h exp %h", nres, out_data,
                   expq.size() ? expq[0] : '0);
        end
        if (expq.size()) void'(expq.pop_front());
        res_cyc.push_back(cyc);
        nres++;
      end
    end
  end

  always @(negedge clk) out_ready <= ($urandom % 3) != 0;

  initial begin
    w1 = lutmul_pkg::gen_weights(11, C1*C0, 4);
    t1 = lutmul_pkg::gen_thresholds(11, C1, T4, S1);
    w2 = lutmul_pkg::gen_weights(22, C1*9, 4);
    t2 = lutmul_pkg::gen_thresholds(22, C1, T4, S2);
    w3 = lutmul_pkg::gen_weights(33, C2*C1, 4);
    t3 = lutmul_pkg::gen_thresholds(33, C2, T4, S3);
    w4 = lutmul_pkg::gen_weights(44, NCL*C2, 8);
    t4 = lutmul_pkg::gen_thresholds(44, NCL, T8, S4);
    b4 = lutmul_pkg::gen_bias(44, NCL, 4 * S4);
    repeat (3) @(negedge clk);
    rst_n <= 1'b1;
    for (int f = 0; f < NF; f++) begin
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          for (int ch = 0; ch < C0; ch++) img[r][c][ch] = 4'($urandom);
      model_frame();
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          in_valid <= 1'b1;
          for (int ch = 0; ch < C0; ch++) in_data[ch*4 +: 4] <= img[r][c][ch];
          forever begin
            automatic bit t;
            #1 t = in_ready;
            @(negedge clk);
            if (t) break;
          end
        end
    end
    in_valid <= 1'b0;
    while (nres < NF) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (nres != NF || out_valid) begin failures++; $display("tb_lutmul_top: %0d results", nres); end
    // Frame rate: one result per H*W input pixels once the pipeline is full.
    for (int i = 1; i < NF; i++) begin
      checks++;
      if (res_cyc[i] - res_cyc[i-1] > H*W + 2*W + 8) begin
        failures++;
        $display("tb_lutmul_top: frame interval %0d cycles", res_cyc[i] - res_cyc[i-1]);
      end
    end
    $display("tb_lutmul_top: padded=%0d ws1=%0d result_stalls=%0d image_backpressure=%0d fifo_buffering=%0d",
             n_pad, n_ws, n_ostall, n_bp, n_fifo);
    checks += 5;
    if (n_pad != NF * (4*H - 4)) failures++;
    if (n_ws == 0) failures++;
    if (n_ostall == 0) failures++;
    if (n_bp == 0) failures++;
    if (n_fifo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    $display("tb_lutmul_top: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
