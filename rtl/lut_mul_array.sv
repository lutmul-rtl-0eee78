// lut_mul_array: fully unrolled array of LUT-based constant multipliers.
//
// Implements the two unrolled loops that compute mul[co][ci] = lut[co][ci][input[ci]]:
// every (output channel, product) position has its own lut_const_mult holding
// its weight, so all products of one input vector appear in the same cycle.
//   Dense (pointwise / standard convolution, fully connected): output channel co
//     multiplies every element j of the input vector (NPROD = IN_N).
//   Depthwise: channel co multiplies only the K*K window elements of its own
//     channel, element j*DW_C + co (NPROD = K*K, COUT = DW_C).
// Folding: with FOLD = 2 the array has COUT/2 physical rows; row p stores the
// weights of output channel p under WS=0 and of channel p+COUT/2 under WS=1,
// so one set of LUTs serves two output channels over two cycles. With
// FOLD = 1 the WS=1 half of every LUT holds zero and ws should stay 0.
// Depthwise layers only support FOLD = 1 (the two channels would need
// different activations). Combinational.
module lut_mul_array #(
  parameter int WBITS     = 4,
  parameter int IN_N      = 32,               // activations per input vector
  parameter int COUT      = 32,               // logical output channels
  parameter bit DEPTHWISE = 1'b0,
  parameter int DW_C      = 1,                // channels of a depthwise window
  parameter int FOLD      = 1,                // 1 or 2
  parameter int SEED      = 1,
  localparam int NPROD    = DEPTHWISE ? IN_N / DW_C : IN_N,
  localparam int NPH      = COUT / FOLD,
  localparam int PBITS    = WBITS + lutmul_pkg::ABITS,
  parameter logic [COUT*NPROD*WBITS-1:0] WEIGHTS =
      (COUT*NPROD*WBITS)'(lutmul_pkg::gen_weights(SEED, COUT*NPROD, WBITS))
) (
  input  logic [IN_N*lutmul_pkg::ABITS-1:0] act_in,  // element e at [e*4 +: 4]
  input  logic                              ws,
  output logic signed [PBITS-1:0]           prod [NPH][NPROD]
);
  localparam int A = lutmul_pkg::ABITS;

  initial begin
    assert (FOLD == 1 || FOLD == 2) else $error("FOLD must be 1 or 2");
    assert (COUT % FOLD == 0) else $error("COUT must be a multiple of FOLD");
    assert (!DEPTHWISE || (FOLD == 1 && COUT == DW_C && IN_N % DW_C == 0))
      else $error("depthwise layer needs FOLD=1 and COUT=DW_C");
  end

  for (genvar p = 0; p < NPH; p++) begin : g_row
    for (genvar j = 0; j < NPROD; j++) begin : g_col
      localparam int AIDX = DEPTHWISE ? j * DW_C + p : j;
      localparam int WA   = lutmul_pkg::sext(32'(WEIGHTS[(p*NPROD + j)*WBITS +: WBITS]), WBITS);
      localparam int PB   = (FOLD == 2) ? p + NPH : p;
      localparam int WB   = (FOLD == 2)
          ? lutmul_pkg::sext(32'(WEIGHTS[(PB*NPROD + j)*WBITS +: WBITS]), WBITS) : 0;
      lut_const_mult #(.WBITS(WBITS), .W0(WA), .W1(WB)) u_mul (
        .act (act_in[AIDX*A +: A]),
        .ws  (ws),
        .prod(prod[p][j])
      );
    end
  end
endmodule
