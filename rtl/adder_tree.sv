// adder_tree: pipelined signed adder tree.
//
// Sums N signed IW-bit inputs into one OW-bit result. Level l holds
// ceil(N/2^l) partial sums; each level adds neighbouring pairs (an odd last
// element is passed on) and is registered, so the latency is
// LAT = max(1, ceil(log2 N)) cycles and a new input set can enter every cycle.
// All registers advance only when en = 1 (stall by holding en low); in_valid
// travels along with the data and comes out as out_valid.
module adder_tree #(
  parameter int N  = 32,
  parameter int IW = 8,
  parameter int OW = IW + $clog2(N) + 1,
  localparam int LAT = (N <= 1) ? 1 : $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_data [N],
  output logic                 out_valid,
  output logic signed [OW-1:0] out_sum
);
  // Number of partial sums at level l.
  function automatic int width_at(input int l);
    int n;
    n = N;
    for (int i = 0; i < l; i++) n = (n + 1) / 2;
    return n;
  endfunction

  for (genvar l = 1; l <= LAT; l++) begin : g_lvl
    localparam int NPREV = width_at(l - 1);
    localparam int NCUR  = width_at(l);
    logic signed [OW-1:0] s [NCUR];
    logic                 v;
    logic signed [OW-1:0] prev [NPREV];
    logic                 prev_v;

    if (l == 1) begin : g_first
      always_comb begin
        for (int i = 0; i < NPREV; i++) prev[i] = OW'(in_data[i]);
        prev_v = in_valid;
      end
    end else begin : g_next
      always_comb begin
        prev   = g_lvl[l-1].s;
        prev_v = g_lvl[l-1].v;
      end
    end

    always_ff @(posedge clk) begin
      if (en) begin
        for (int i = 0; i < NCUR; i++) begin
          if (2*i + 1 < NPREV) s[i] <= prev[2*i] + prev[2*i+1];
          else                 s[i] <= prev[2*i];
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  v <= 1'b0;
      else if (en) v <= prev_v;
    end
  end

  assign out_sum   = g_lvl[LAT].s[0];
  assign out_valid = g_lvl[LAT].v;
endmodule
