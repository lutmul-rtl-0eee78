// mvau: streaming LUT-based matrix-vector unit, the compute core of a layer.
//
// Each accepted input vector (IN_N unsigned 4-bit activations, e.g. one im2col
// window) is multiplied by the layer's constant weight matrix held in LUTs,
// each output channel's products are summed by its own pipelined adder tree,
// and the sums pass through the threshold unit (optional bias, then
// multi-threshold activation) to give COUT OBITS-bit activations.
//   Pipeline: input register -> LUT products (registered) -> adder tree
//   (ceil(log2 NPROD) levels) -> bias/threshold register. Latency from an input
//   handshake to out_valid is 3 + ceil(log2 NPROD) + (FOLD - 1) cycles.
//   Rate: FOLD = 1 (fully parallel) accepts one vector per cycle (II = 1).
//   FOLD = 2 keeps COUT/2 LUT rows, each holding two weights selected by WS:
//   every input vector is held for two cycles (WS = 0 then 1) and one output
//   vector leaves every two cycles; channels 0..COUT/2-1 come from WS = 0.
// Flow control: valid/ready on both sides. The whole pipeline advances when
// the output register is empty or being read (en = !out_valid | out_ready), so
// a stalled consumer freezes it without losing data; in_ready does not depend
// on in_valid. Reset is asynchronous, active low, and clears the valid bits.
module mvau #(
  parameter int WBITS     = 4,
  parameter int IN_N      = 32,
  parameter int COUT      = 32,
  parameter bit DEPTHWISE = 1'b0,
  parameter int DW_C      = 1,
  parameter int FOLD      = 1,
  parameter int OBITS     = 4,
  parameter bit USE_BIAS  = 1'b0,
  parameter int SEED      = 1,
  localparam int NPROD    = DEPTHWISE ? IN_N / DW_C : IN_N,
  localparam int NPH      = COUT / FOLD,
  localparam int PBITS    = WBITS + lutmul_pkg::ABITS,
  localparam int AW       = PBITS + $clog2(NPROD) + 1,
  localparam int NT       = (1 << OBITS) - 1,
  parameter int TH_STEP   = lutmul_pkg::th_step(NPROD, WBITS, OBITS),
  parameter logic [COUT*NPROD*WBITS-1:0] WEIGHTS =
      (COUT*NPROD*WBITS)'(lutmul_pkg::gen_weights(SEED, COUT*NPROD, WBITS)),
  parameter logic [COUT*NT*32-1:0] THRESHOLDS =
      (COUT*NT*32)'(lutmul_pkg::gen_thresholds(SEED, COUT, NT, TH_STEP)),
  parameter logic [COUT*32-1:0] BIAS =
      (COUT*32)'(lutmul_pkg::gen_bias(SEED, COUT, 4 * TH_STEP))
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  output logic                              in_ready,
  input  logic [IN_N*lutmul_pkg::ABITS-1:0] in_data,
  output logic                              out_valid,
  input  logic                              out_ready,
  output logic [COUT*OBITS-1:0]             out_data,   // channel c at [c*OBITS +: OBITS]
  output logic                              ws_mon      // WS applied to the LUTs this cycle
);
  localparam int A = lutmul_pkg::ABITS;

  logic en;

  // Stage A: input vector held for FOLD cycles.
  logic                a_valid;
  logic                a_phase;
  logic [IN_N*A-1:0]   a_data;
  logic                a_last;

  assign a_last   = (FOLD == 1) || a_phase;
  assign en       = !out_valid || out_ready;
  assign in_ready = en && (!a_valid || a_last);
  assign ws_mon   = a_phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid <= 1'b0;
      a_phase <= 1'b0;
    end else if (en) begin
      if (in_valid && in_ready) begin
        a_valid <= 1'b1;
        a_phase <= 1'b0;
      end else if (a_valid && !a_last) begin
        a_phase <= 1'b1;
      end else begin
        a_valid <= 1'b0;
        a_phase <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) if (en && in_valid && in_ready) a_data <= in_data;

  // Stage B: LUT products.
  logic signed [PBITS-1:0] prod_c [NPH][NPROD];
  logic signed [PBITS-1:0] prod_q [NPH][NPROD];
  logic                    b_valid;
  logic                    b_phase;

  lut_mul_array #(
    .WBITS(WBITS), .IN_N(IN_N), .COUT(COUT), .DEPTHWISE(DEPTHWISE), .DW_C(DW_C),
    .FOLD(FOLD), .SEED(SEED), .WEIGHTS(WEIGHTS)
  ) u_mul (
    .act_in(a_data),
    .ws    (a_phase),
    .prod  (prod_c)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid <= 1'b0;
      b_phase <= 1'b0;
    end else if (en) begin
      b_valid <= a_valid;
      b_phase <= a_phase;
    end
  end

  always_ff @(posedge clk) if (en) prod_q <= prod_c;

  // Adder trees, one per physical output row.
  localparam int TLAT = (NPROD <= 1) ? 1 : $clog2(NPROD);
  logic signed [AW-1:0] sum [NPH];
  logic [NPH-1:0]       sum_valid;
  logic [TLAT-1:0]      ph_pipe;

  for (genvar p = 0; p < NPH; p++) begin : g_tree
    adder_tree #(.N(NPROD), .IW(PBITS), .OW(AW)) u_tree (
      .clk(clk), .rst_n(rst_n), .en(en),
      .in_valid (b_valid),
      .in_data  (prod_q[p]),
      .out_valid(sum_valid[p]),
      .out_sum  (sum[p])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ph_pipe <= '0;
    else if (en) begin
      if (TLAT == 1) ph_pipe <= TLAT'(b_phase);
      else           ph_pipe <= TLAT'({ph_pipe, b_phase});
    end
  end

  // Bias + thresholds.
  logic                 t_valid;
  logic                 t_phase;
  logic [NPH*OBITS-1:0] t_act;

  threshold_unit #(
    .COUT(COUT), .FOLD(FOLD), .AW(AW), .OBITS(OBITS), .USE_BIAS(USE_BIAS),
    .SEED(SEED), .TH_STEP(TH_STEP), .THRESHOLDS(THRESHOLDS), .BIAS(BIAS)
  ) u_thr (
    .clk(clk), .rst_n(rst_n), .en(en),
    .in_valid (&sum_valid),   // all trees run in lock step
    .in_phase (ph_pipe[TLAT-1]),
    .acc      (sum),
    .out_valid(t_valid),
    .out_phase(t_phase),
    .out_act  (t_act)
  );

  // Output: with FOLD = 2 the WS = 0 half waits in hold until WS = 1 arrives.
  assign out_valid = t_valid && ((FOLD == 1) || t_phase);
  if (FOLD == 1) begin : g_out1
    assign out_data = t_act;
  end else begin : g_out2
    logic [NPH*OBITS-1:0] hold;
    always_ff @(posedge clk) if (en && t_valid && !t_phase) hold <= t_act;
    assign out_data = {t_act, hold};
  end

  // Flow-control rules, checked once reset has been released.
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;
  property p_hold_out;
    @(posedge clk) disable iff (!chk_en) (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  a_hold_out: assert property (p_hold_out) else $error("mvau output changed while stalled");
endmodule
