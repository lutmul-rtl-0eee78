// lut_const_mult: LUT-based constant multiplier ("LUT-based MUL" element).
//
// Two signed weights W0 and W1 are embedded into PBITS/2 LUT6_2 tables, where
// PBITS = WBITS + 4 is the width of the signed product. Each LUT6_2 has its
// inputs wired to {1'b1, ws, act[3:0]}: I5 = 1 enables both outputs, WS
// selects weight W0 (0) or W1 (1), and the 4-bit unsigned activation forms the
// low address. LUT number p drives product bit 2p+1 from O6 and bit 2p from
// O5. For 4-bit weights this is four LUT6_2 per pair of weights, i.e. two
// LUT6 per 4-bit multiplication, and the INIT values come from
// lutmul_pkg::lut_init. 8-bit weights (first/last layer) use six LUT6_2.
// Combinational; the product is valid as soon as act and ws are.
module lut_const_mult #(
  parameter int WBITS = 4,      // weight width, even
  parameter int W0    = 1,      // weight selected by ws = 0
  parameter int W1    = -3,     // weight selected by ws = 1
  localparam int PBITS = WBITS + lutmul_pkg::ABITS
) (
  input  logic [lutmul_pkg::ABITS-1:0] act,   // unsigned activation
  input  logic                         ws,    // weight select
  output logic signed [PBITS-1:0]      prod   // act * (ws ? W1 : W0)
);
  localparam int NLUT = PBITS / 2;

  for (genvar p = 0; p < NLUT; p++) begin : g_lut
    lut6_2 #(.INIT(lutmul_pkg::lut_init(W0, W1, p))) u_lut (
      .i ({1'b1, ws, act}),
      .o6(prod[2*p+1]),
      .o5(prod[2*p])
    );
  end
endmodule
