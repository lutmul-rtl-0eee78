// max_operator: per-channel maximum over a pooling window.
//
// Takes one window of N = K*K pixels of C unsigned 4-bit channels (layout of
// conv_generator: element (n, c) at [(n*C + c)*4 +: 4]) and returns, for every
// channel, the largest of its N values. One register stage with valid/ready;
// the stage advances when its output is empty or being read, so in_ready does
// not depend on in_valid. Latency 1 cycle, one window per cycle.
module max_operator #(
  parameter int N = 4,
  parameter int C = 16,
  localparam int A = lutmul_pkg::ABITS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [N*C*A-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [C*A-1:0]   out_data
);
  logic [C*A-1:0] max_c;

  always_comb begin
    for (int c = 0; c < C; c++) begin
      logic [A-1:0] m;
      m = '0;
      for (int n = 0; n < N; n++)
        if (in_data[(n*C + c)*A +: A] > m) m = in_data[(n*C + c)*A +: A];
      max_c[c*A +: A] = m;
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) if (in_ready && in_valid) out_data <= max_c;
endmodule
