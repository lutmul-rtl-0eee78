// lut6_2: model of the 6-input, dual-output FPGA look-up table used to hold
// embedded multiplication results.
//
// The table is built from two 5-input LUTs sharing I4..I0: O5 reads the lower
// half INIT[31:0] at {I4..I0}; O6 reads the whole table at {I5..I0}, so it is
// the upper LUT when I5=1 and the lower LUT when I5=0. With I5 tied to 1 the
// primitive delivers two independent 5-input functions, which is how the
// multiplier uses it. Purely combinational; INIT is a compile-time constant
// (the configuration of the table).
module lut6_2 #(
  parameter logic [63:0] INIT = 64'h0
) (
  input  logic [5:0] i,   // {I5, I4, I3, I2, I1, I0}
  output logic       o6,
  output logic       o5
);
  always_comb begin
    o6 = INIT[i];
    o5 = INIT[{1'b0, i[4:0]}];
  end
endmodule
