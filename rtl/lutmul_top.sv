// lutmul_top: on-chip dataflow accelerator built from LUT-based multipliers.
//
// Every layer has its own hardware and its weights live inside LUTs, so
// activations flow from layer to layer through FIFOs without touching
// external memory:
//   image stream -> pointwise conv (C0 -> C1) -> FIFO -> depthwise 3x3 conv (C1)
//   -> FIFO -> pointwise conv (C1 -> C2) -> FIFO -> max pool (sliding window +
//   max operator) -> FIFO -> fully connected layer with bias (NCLASS outputs)
//   -> result stream.
// Convolution layers are fully parallel (one output pixel per cycle). The
// classifier uses 8-bit weights and 8-bit outputs and is folded by two
// through the LUTs' weight-select input. Inputs are IMG_H x IMG_W pixels of C0
// unsigned 4-bit channels in raster order, channel c at in_data[c*4 +: 4];
// each frame yields one result vector of NCLASS unsigned OBITS_FC-bit values,
// class n at out_data[n*OBITS_FC +: OBITS_FC]. Valid/ready streams; active-low
// asynchronous reset. The *_mon outputs expose internal events (padding,
// weight select, FIFO occupancy) for observation.
// Lint note: the padding flags of the two pointwise layers (pad1, pad3, always
// 0 since they use no padding) and the WS monitors of the unfolded layers
// (ws1..ws3, constant) are left unused on purpose; only the depthwise padding
// flag and the classifier's WS are brought out as observation ports.
module lutmul_top #(
  parameter int IMG_H      = 14,
  parameter int IMG_W      = 14,
  parameter int C0         = 32,
  parameter int C1         = 32,
  parameter int C2         = 16,
  parameter int DW_K       = 3,
  parameter int DW_S       = 1,
  parameter int POOL_K     = 14,
  parameter int POOL_S     = 14,
  parameter int NCLASS     = 10,
  parameter int WBITS_FC   = 8,
  parameter int OBITS_FC   = 8,
  parameter int FOLD_FC    = 2,
  parameter int FIFO_DEPTH = 32,
  localparam int A   = lutmul_pkg::ABITS,
  localparam int H2  = (IMG_H + 2*(DW_K/2) - DW_K) / DW_S + 1,
  localparam int W2  = (IMG_W + 2*(DW_K/2) - DW_K) / DW_S + 1,
  localparam int FW  = $clog2(FIFO_DEPTH+1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // image stream
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [C0*A-1:0]            in_data,
  // result stream
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [NCLASS*OBITS_FC-1:0] out_data,
  // observation
  output logic                       dw_padded_mon,
  output logic                       fc_ws_mon,
  output logic [FW-1:0]              fifo_count_mon [4]
);
  logic           l1_v, l1_r;  logic [C1*A-1:0] l1_d;
  logic           f1_v, f1_r;  logic [C1*A-1:0] f1_d;
  logic           l2_v, l2_r;  logic [C1*A-1:0] l2_d;
  logic           f2_v, f2_r;  logic [C1*A-1:0] f2_d;
  logic           l3_v, l3_r;  logic [C2*A-1:0] l3_d;
  logic           f3_v, f3_r;  logic [C2*A-1:0] f3_d;
  logic           l4_v, l4_r;  logic [C2*A-1:0] l4_d;
  logic           f4_v, f4_r;  logic [C2*A-1:0] f4_d;
  logic           pad1, pad3, ws1, ws2, ws3;

  // Pointwise convolution C0 -> C1.
  conv_layer #(.H(IMG_H), .W(IMG_W), .CIN(C0), .COUT(C1), .K(1), .S(1), .P(0),
               .SEED(11)) u_pw1 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(l1_v), .out_ready(l1_r), .out_data(l1_d),
    .padded_mon(pad1), .ws_mon(ws1)
  );

  stream_fifo #(.WIDTH(C1*A), .DEPTH(FIFO_DEPTH)) u_fifo1 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(l1_v), .in_ready(l1_r), .in_data(l1_d),
    .out_valid(f1_v), .out_ready(f1_r), .out_data(f1_d), .count(fifo_count_mon[0])
  );

  // Depthwise convolution DW_K x DW_K, "same" padding.
  conv_layer #(.H(IMG_H), .W(IMG_W), .CIN(C1), .COUT(C1), .K(DW_K), .S(DW_S),
               .P(DW_K/2), .DEPTHWISE(1'b1), .SEED(22)) u_dw (
    .clk(clk), .rst_n(rst_n),
    .in_valid(f1_v), .in_ready(f1_r), .in_data(f1_d),
    .out_valid(l2_v), .out_ready(l2_r), .out_data(l2_d),
    .padded_mon(dw_padded_mon), .ws_mon(ws2)
  );

  stream_fifo #(.WIDTH(C1*A), .DEPTH(FIFO_DEPTH)) u_fifo2 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(l2_v), .in_ready(l2_r), .in_data(l2_d),
    .out_valid(f2_v), .out_ready(f2_r), .out_data(f2_d), .count(fifo_count_mon[1])
  );

  // Pointwise convolution C1 -> C2.
  conv_layer #(.H(H2), .W(W2), .CIN(C1), .COUT(C2), .K(1), .S(1), .P(0),
               .SEED(33)) u_pw2 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(f2_v), .in_ready(f2_r), .in_data(f2_d),
    .out_valid(l3_v), .out_ready(l3_r), .out_data(l3_d),
    .padded_mon(pad3), .ws_mon(ws3)
  );

  stream_fifo #(.WIDTH(C2*A), .DEPTH(FIFO_DEPTH)) u_fifo3 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(l3_v), .in_ready(l3_r), .in_data(l3_d),
    .out_valid(f3_v), .out_ready(f3_r), .out_data(f3_d), .count(fifo_count_mon[2])
  );

  // Max pooling.
  pool_layer #(.H(H2), .W(W2), .C(C2), .PK(POOL_K), .PS(POOL_S)) u_pool (
    .clk(clk), .rst_n(rst_n),
    .in_valid(f3_v), .in_ready(f3_r), .in_data(f3_d),
    .out_valid(l4_v), .out_ready(l4_r), .out_data(l4_d)
  );

  stream_fifo #(.WIDTH(C2*A), .DEPTH(FIFO_DEPTH)) u_fifo4 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(l4_v), .in_ready(l4_r), .in_data(l4_d),
    .out_valid(f4_v), .out_ready(f4_r), .out_data(f4_d), .count(fifo_count_mon[3])
  );

  // Fully connected classifier: LUT-based MUL, add with bias, thresholds.
  mvau #(.WBITS(WBITS_FC), .IN_N(C2 * ((H2 - POOL_K) / POOL_S + 1) * ((W2 - POOL_K) / POOL_S + 1)),
         .COUT(NCLASS), .FOLD(FOLD_FC), .OBITS(OBITS_FC), .USE_BIAS(1'b1), .SEED(44)) u_fc (
    .clk(clk), .rst_n(rst_n),
    .in_valid(f4_v), .in_ready(f4_r), .in_data(f4_d),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .ws_mon(fc_ws_mon)
  );
endmodule
