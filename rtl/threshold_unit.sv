// threshold_unit: "Add with bias" + "Threshold Memory" stage of a layer.
//
// Quantised networks fold per-channel scaling and batch normalisation into the
// activation function, which then becomes a multi-threshold unit: the OBITS-bit
// unsigned output of channel c is the number of its NT = 2^OBITS - 1 rising
// thresholds T[c][0..NT-1] that the accumulator (plus an optional per-channel
// bias) reaches, i.e. out = sum_k (acc + bias[c] >= T[c][k]). All NPH physical
// channels are compared in parallel against constant thresholds (a ROM). With
// FOLD = 2 the unit serves output channel p on phase 0 and p + NPH on phase 1,
// so in_phase selects the threshold/bias set. One register stage, advancing
// when en = 1; valid and phase travel with the data.
module threshold_unit #(
  parameter int COUT     = 32,               // logical channels
  parameter int FOLD     = 1,
  parameter int AW       = 16,               // accumulator width (< 32)
  parameter int OBITS    = 4,
  parameter bit USE_BIAS = 1'b0,
  parameter int SEED     = 1,
  parameter int TH_STEP  = 64,
  localparam int NT      = (1 << OBITS) - 1,
  localparam int NPH     = COUT / FOLD,
  parameter logic [COUT*NT*32-1:0] THRESHOLDS =
      (COUT*NT*32)'(lutmul_pkg::gen_thresholds(SEED, COUT, NT, TH_STEP)),
  parameter logic [COUT*32-1:0] BIAS =
      (COUT*32)'(lutmul_pkg::gen_bias(SEED, COUT, 4 * TH_STEP))
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 in_valid,
  input  logic                 in_phase,
  input  logic signed [AW-1:0] acc [NPH],
  output logic                 out_valid,
  output logic                 out_phase,
  output logic [NPH*OBITS-1:0] out_act     // channel p at [p*OBITS +: OBITS]
);
  logic [NPH*OBITS-1:0] act_c;

  always_comb begin
    for (int p = 0; p < NPH; p++) begin
      int ch;
      logic signed [31:0] v;
      logic [OBITS-1:0] cnt;
      ch  = p + (in_phase ? NPH : 0);
      v   = 32'(acc[p]);
      if (USE_BIAS) v = v + signed'(BIAS[ch*32 +: 32]);
      cnt = '0;
      for (int k = 0; k < NT; k++)
        if (v >= signed'(THRESHOLDS[(ch*NT + k)*32 +: 32])) cnt = cnt + 1'b1;
      act_c[p*OBITS +: OBITS] = cnt;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_phase <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid;
      out_phase <= in_phase;
    end
  end

  always_ff @(posedge clk) if (en) out_act <= act_c;
endmodule
