// pool_layer: max-pooling layer = sliding window unit + max operator.
//
// A conv_generator without padding cuts PK x PK windows with stride PS out of
// the incoming H x W x C feature map and a max_operator reduces each window to
// one pixel of C channel maxima. PK = PS = H = W gives global max pooling
// (one output pixel per frame). Valid/ready streams on both sides.
// Lint note: the window generator's padding flag (w_padded) is left unused on
// purpose; pooling windows are never padded (P = 0).
module pool_layer #(
  parameter int H  = 14,
  parameter int W  = 14,
  parameter int C  = 16,
  parameter int PK = 14,
  parameter int PS = 14,
  localparam int A = lutmul_pkg::ABITS
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [C*A-1:0] in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [C*A-1:0] out_data
);
  logic                  w_valid, w_ready, w_padded;
  logic [PK*PK*C*A-1:0]  w_data;

  conv_generator #(.H(H), .W(W), .C(C), .K(PK), .S(PS), .P(0)) u_swu (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data),
    .out_padded(w_padded)
  );

  max_operator #(.N(PK*PK), .C(C)) u_max (
    .clk(clk), .rst_n(rst_n),
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data)
  );
endmodule
