// tb_pool_layer: max pooling 2x2 stride 2 on 6x4 frames of 3 channels and
// global pooling on 4x4 frames, compared with maxima computed here, with
// random input gaps and output stalls, three frames each.
module tb_pool_layer;
  localparam int C = 3, NF = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_iv = 1'b0, a_ir, a_ov, a_or = 1'b0;
  logic b_iv = 1'b0, b_ir, b_ov, b_or = 1'b0;
  logic [C*4-1:0] a_id = '0, a_od, b_id = '0, b_od;

  pool_layer #(.H(6), .W(4), .C(C), .PK(2), .PS(2)) u_a (.clk(clk), .rst_n(rst_n),
    .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id), .out_valid(a_ov), .out_ready(a_or), .out_data(a_od));
  pool_layer #(.H(4), .W(4), .C(C), .PK(4), .PS(4)) u_b (.clk(clk), .rst_n(rst_n),
    .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id), .out_valid(b_ov), .out_ready(b_or), .out_data(b_od));

  logic [3:0] fa [NF][6][4][C];
  logic [3:0] fb [NF][4][4][C];
  logic [C*4-1:0] qa [$];
  logic [C*4-1:0] qb [$];
  int na = 0, nb = 0;

  initial begin
    for (int f = 0; f < NF; f++) begin
      for (int r = 0; r < 6; r++) for (int c = 0; c < 4; c++) for (int ch = 0; ch < C; ch++)
        fa[f][r][c][ch] = 4'($urandom);
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) for (int ch = 0; ch < C; ch++)
        fb[f][r][c][ch] = 4'($urandom % 12);
      for (int oy = 0; oy < 3; oy++) for (int ox = 0; ox < 2; ox++) begin
        logic [C*4-1:0] e;
        for (int ch = 0; ch < C; ch++) begin
          logic [3:0] m;
          m = 0;
          for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++)
            if (fa[f][2*oy+dy][2*ox+dx][ch] > m) m = fa[f][2*oy+dy][2*ox+dx][ch];
          e[ch*4 +: 4] = m;
        end
        qa.push_back(e);
      end
      begin
        logic [C*4-1:0] e;
        for (int ch = 0; ch < C; ch++) begin
          logic [3:0] m;
          m = 0;
          for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) if (fb[f][r][c][ch] > m) m = fb[f][r][c][ch];
          e[ch*4 +: 4] = m;
        end
        qb.push_back(e);
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n && a_ov && a_or) begin
      checks++; na++;
      if (a_od !== qa.pop_front()) begin failures++; $display("tb_pool_layer: 2x2 wrong"); end
    end
    if (rst_n && b_ov && b_or) begin
      checks++; nb++;
      if (b_od !== qb.pop_front()) begin failures++; $display("tb_pool_layer: global wrong"); end
    end
  end

  always @(negedge clk) begin
    a_or <= ($urandom % 3) != 0;
    b_or <= ($urandom % 2) != 0;
  end

  bit a_done = 1'b0, b_done = 1'b0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n <= 1'b1;
    for (int f = 0; f < NF; f++) for (int r = 0; r < 6; r++) for (int c = 0; c < 4; c++) begin
      while (($urandom % 4) == 0) begin a_iv <= 1'b0; @(negedge clk); end
      a_iv <= 1'b1;
      for (int ch = 0; ch < C; ch++) a_id[ch*4 +: 4] <= fa[f][r][c][ch];
      forever begin automatic bit t; #1 t = a_ir; @(negedge clk); if (t) break; end
    end
    a_iv <= 1'b0;
    a_done = 1'b1;
  end

  initial begin
    repeat (3) @(negedge clk);
    for (int f = 0; f < NF; f++) for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) begin
      b_iv <= 1'b1;
      for (int ch = 0; ch < C; ch++) b_id[ch*4 +: 4] <= fb[f][r][c][ch];
      forever begin automatic bit t; #1 t = b_ir; @(negedge clk); if (t) break; end
    end
    b_iv <= 1'b0;
    b_done = 1'b1;
  end

  initial begin
    #1 wait (a_done && b_done);
    repeat (30) @(negedge clk);
    checks += 2;
    if (na != NF*6) begin failures++; $display("tb_pool_layer: %0d 2x2 outputs", na); end
    if (nb != NF)   begin failures++; $display("tb_pool_layer: %0d global outputs", nb); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
