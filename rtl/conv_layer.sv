// conv_layer: one convolution layer of the dataflow pipeline.
//
// A conv_generator turns the incoming H x W x CIN raster stream into K x K x CIN
// windows (stride S, zero padding P) and an mvau multiplies each window by the
// layer's LUT-embedded weights, sums per output channel in adder trees and
// applies the threshold activation. DEPTHWISE = 1 connects output channel c
// only to the K*K window values of input channel c (COUT must equal CIN).
// Pointwise layers use K = 1, S = 1, P = 0. Valid/ready streams of one pixel
// (all channels) per handshake on both sides; fully parallel (FOLD = 1) layers
// produce one output pixel per cycle once the window pipeline is running.
module conv_layer #(
  parameter int H         = 14,
  parameter int W         = 14,
  parameter int CIN       = 32,
  parameter int COUT      = 32,
  parameter int K         = 1,
  parameter int S         = 1,
  parameter int P         = 0,
  parameter bit DEPTHWISE = 1'b0,
  parameter int FOLD      = 1,
  parameter int WBITS     = 4,
  parameter int OBITS     = 4,
  parameter int SEED      = 1,
  localparam int A        = lutmul_pkg::ABITS,
  localparam int IN_N     = K * K * CIN,
  localparam int NPROD    = DEPTHWISE ? K * K : IN_N,
  localparam int NT       = (1 << OBITS) - 1,
  parameter int TH_STEP   = lutmul_pkg::th_step(NPROD, WBITS, OBITS),
  parameter logic [COUT*NPROD*WBITS-1:0] WEIGHTS =
      (COUT*NPROD*WBITS)'(lutmul_pkg::gen_weights(SEED, COUT*NPROD, WBITS)),
  parameter logic [COUT*NT*32-1:0] THRESHOLDS =
      (COUT*NT*32)'(lutmul_pkg::gen_thresholds(SEED, COUT, NT, TH_STEP))
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [CIN*A-1:0]        in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [COUT*OBITS-1:0]   out_data,
  output logic                    padded_mon,   // a padded window entered the MVAU
  output logic                    ws_mon
);
  logic                 w_valid, w_ready, w_padded;
  logic [IN_N*A-1:0]    w_data;

  conv_generator #(.H(H), .W(W), .C(CIN), .K(K), .S(S), .P(P)) u_gen (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data),
    .out_padded(w_padded)
  );

  assign padded_mon = w_valid && w_ready && w_padded;

  mvau #(
    .WBITS(WBITS), .IN_N(IN_N), .COUT(COUT), .DEPTHWISE(DEPTHWISE), .DW_C(CIN),
    .FOLD(FOLD), .OBITS(OBITS), .USE_BIAS(1'b0), .SEED(SEED), .TH_STEP(TH_STEP),
    .WEIGHTS(WEIGHTS), .THRESHOLDS(THRESHOLDS)
  ) u_mvau (
    .clk(clk), .rst_n(rst_n),
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .ws_mon(ws_mon)
  );
endmodule
