// mvau_harness: drives one mvau configuration and checks it against a plain
// integer model (multiply, sum, add bias, count thresholds) written from the
// layer's weight/threshold/bias constants.
// Phase 1 streams NVEC vectors back to back with the output always ready and
// checks the first-result latency (3 + ceil(log2 NPROD) + FOLD - 1) and the rate
// (one result every FOLD cycles). Phase 2 streams NVEC vectors with random
// input gaps and random output stalls and checks every result in order.
module mvau_harness #(
  parameter int WBITS     = 4,
  parameter int IN_N      = 32,
  parameter int COUT      = 32,
  parameter bit DEPTHWISE = 1'b0,
  parameter int DW_C      = 1,
  parameter int FOLD      = 1,
  parameter int OBITS     = 4,
  parameter bit USE_BIAS  = 1'b0,
  parameter int SEED      = 1,
  parameter int NVEC      = 40
) (
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int NPROD = DEPTHWISE ? IN_N / DW_C : IN_N;
  localparam int NT    = (1 << OBITS) - 1;
  localparam int STEP  = lutmul_pkg::th_step(NPROD, WBITS, OBITS);
  localparam int LAT   = 3 + ((NPROD <= 1) ? 1 : $clog2(NPROD)) + FOLD - 1;
  localparam logic [COUT*NPROD*WBITS-1:0] WTS =
      (COUT*NPROD*WBITS)'(lutmul_pkg::gen_weights(SEED, COUT*NPROD, WBITS));
  localparam logic [COUT*NT*32-1:0] THS =
      (COUT*NT*32)'(lutmul_pkg::gen_thresholds(SEED, COUT, NT, STEP));
  localparam logic [COUT*32-1:0] BIS =
      (COUT*32)'(lutmul_pkg::gen_bias(SEED, COUT, 4 * STEP));

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                   in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0, ws_mon;
  logic [IN_N*4-1:0]      in_data = '0;
  logic [COUT*OBITS-1:0]  out_data;

  mvau #(.WBITS(WBITS), .IN_N(IN_N), .COUT(COUT), .DEPTHWISE(DEPTHWISE), .DW_C(DW_C),
         .FOLD(FOLD), .OBITS(OBITS), .USE_BIAS(USE_BIAS), .SEED(SEED),
         .WEIGHTS(WTS), .THRESHOLDS(THS), .BIAS(BIS)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data), .ws_mon(ws_mon));

  function automatic logic [COUT*OBITS-1:0] model(input logic [IN_N*4-1:0] x);
    logic [COUT*OBITS-1:0] r;
    for (int co = 0; co < COUT; co++) begin
      longint acc;
      int cnt;
      acc = 0;
      for (int j = 0; j < NPROD; j++) begin
        int aidx, w;
        aidx = DEPTHWISE ? j * DW_C + co : j;
        w = int'(WTS[(co*NPROD + j)*WBITS +: WBITS]);
        if (w >= (1 << (WBITS-1))) w -= (1 << WBITS);
        acc += longint'(w) * longint'(x[aidx*4 +: 4]);
      end
      if (USE_BIAS) acc += longint'(signed'(BIS[co*32 +: 32]));
      cnt = 0;
      for (int k = 0; k < NT; k++)
        if (acc >= longint'(signed'(THS[(co*NT + k)*32 +: 32]))) cnt++;
      r[co*OBITS +: OBITS] = OBITS'(cnt);
    end
    return r;
  endfunction

  function automatic logic [IN_N*4-1:0] rand_vec();
    logic [IN_N*4-1:0] v;
    for (int i = 0; i < IN_N; i++) v[i*4 +: 4] = 4'($urandom);
    return v;
  endfunction

  logic [COUT*OBITS-1:0] expq[$];
  int   cyc = 0, first_in = -1, first_out = -1, last_out = -1, nout = 0;
  bit   random_mode = 1'b0;
  int   distinct = 0;
  logic [COUT*OBITS-1:0] prev_out = '0;

  always @(posedge clk) cyc <= cyc + 1;

  // Input handshakes feed the model; output handshakes are compared.
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      expq.push_back(model(in_data));
      if (first_in < 0) first_in = cyc;
    end
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("mvau_harness: unexpected output");
      end else begin
        logic [COUT*OBITS-1:0] e;
        e = expq.pop_front();
        if (e !== out_data) begin
          failures++;
          if (failures < 5) $display("mvau_harness: mismatch got %h exp %h", out_data, e);
        end
      end
      if (out_data != prev_out) distinct++;
      prev_out = out_data;
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      nout++;
    end
  end

  // Stimulus: a vector stays on in_data until a handshake took it, then the
  // next one follows (after a random gap when gaps is set) until sent = target.
  int sent = 0, target = 0;
  bit gaps = 1'b0, took = 1'b0, ready_const = 1'b0;

  always @(posedge clk) took <= rst_n && in_valid && in_ready;

  always @(negedge clk) begin
    out_ready <= random_mode ? (($urandom % 3) != 0) : ready_const;
    if (in_valid && !took) begin
      // hold the offered vector
    end else if (sent < target && (!gaps || ($urandom % 4) != 0)) begin
      in_valid <= 1'b1;
      in_data  <= rand_vec();
      sent++;
    end else begin
      in_valid <= 1'b0;
    end
  end

  initial begin
    done = 1'b0; checks = 0; failures = 0;
    repeat (3) @(negedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    // Phase 1: back to back.
    ready_const = 1'b1;
    target = NVEC;
    while (nout < NVEC) @(posedge clk);
    checks++;
    if (first_out - first_in != LAT) begin
      failures++;
      $display("mvau_harness: latency %0d, expected %0d", first_out - first_in, LAT);
    end
    checks++;
    if (last_out - first_out != (NVEC - 1) * FOLD) begin
      failures++;
      $display("mvau_harness: %0d results took %0d cycles, expected %0d",
               NVEC, last_out - first_out, (NVEC - 1) * FOLD);
    end
    // Phase 2: random gaps and stalls.
    random_mode = 1'b1;
    gaps = 1'b1;
    target = 2 * NVEC;
    while (nout < 2 * NVEC) @(posedge clk);
    random_mode = 1'b0;
    checks++;
    if (distinct < NVEC / 2) begin
      failures++;
      $display("mvau_harness: outputs barely change (%0d distinct)", distinct);
    end
    done = 1'b1;
  end
endmodule
