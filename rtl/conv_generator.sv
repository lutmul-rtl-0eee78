// conv_generator: streaming im2col / sliding-window generator.
//
// Consumes a feature map as a raster stream of pixels (row by row, one pixel
// of C channels per handshake) and produces, for every output position in
// raster order, the K x K x C window the convolution needs, zero outside the
// image (padding P). Window element (ky, kx, c) sits at
// out_data[((ky*K + kx)*C + c)*4 +: 4]. The same module serves as the
// pointwise generator (K=1), the depthwise/standard generator (e.g. K=3,
// P=1) and the sliding window unit of a pooling layer (P=0).
// Storage is a ring of NB = K + S input rows (a whole frame when that is
// larger than H). Input row r may be written once every output row that
// still needs rows below r + 1 - NB has been produced; output row oy may be
// produced once input row min(oy*S - P + K - 1, H - 1) is complete. With
// S = 1 this sustains one window per cycle after a start-up latency of about
// K - P rows. Frames follow each other back to back; the generator resets its
// counters when a frame has been fully read and written. out_data and
// out_valid are combinational from the stored rows (first-word fall-through);
// in_ready does not depend on in_valid.
module conv_generator #(
  parameter int H = 14,
  parameter int W = 14,
  parameter int C = 32,
  parameter int K = 3,
  parameter int S = 1,
  parameter int P = 1,
  localparam int A  = lutmul_pkg::ABITS,
  localparam int OH = (H + 2*P - K) / S + 1,
  localparam int OW = (W + 2*P - K) / S + 1,
  localparam int NB = (K + S > H) ? H : K + S,
  localparam int OYW = (OH > 1) ? $clog2(OH) : 1,
  localparam int OXW = (OW > 1) ? $clog2(OW) : 1,
  localparam int WCW = (W > 1) ? $clog2(W) : 1,
  localparam int NBW = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [C*A-1:0]       in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [K*K*C*A-1:0]   out_data,
  output logic                 out_padded   // current window reaches into the padding
);
  logic [C*A-1:0] mem [NB][W];

  logic [$clog2(H+1)-1:0]  wr_r;   // rows completely written (0..H)
  logic [WCW-1:0]          wr_c;
  logic [NBW-1:0]          wr_slot;
  logic [OYW-1:0]          rd_oy;
  logic [OXW-1:0]          rd_ox;
  logic                    rd_done;

  logic signed [31:0] r_lo, c_lo, need_hi, free_lo;

  always_comb begin
    r_lo    = int'(rd_oy) * S - P;
    c_lo    = int'(rd_ox) * S - P;
    need_hi = (r_lo + K - 1 > H - 1) ? H - 1 : r_lo + K - 1;
    free_lo = (r_lo < 0) ? 0 : r_lo;
  end

  assign out_valid = !rd_done && (int'(wr_r) > need_hi);
  assign in_ready  = (int'(wr_r) < H) && (rd_done || int'(wr_r) < free_lo + NB);

  always_comb begin
    out_padded = 1'b0;
    for (int ky = 0; ky < K; ky++) begin
      for (int kx = 0; kx < K; kx++) begin
        int r, c;
        r = r_lo + ky;
        c = c_lo + kx;
        if (r < 0 || r >= H || c < 0 || c >= W) begin
          out_data[(ky*K + kx)*C*A +: C*A] = '0;
          out_padded = 1'b1;
        end else begin
          out_data[(ky*K + kx)*C*A +: C*A] = mem[r % NB][c];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wr_slot][wr_c] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_r    <= '0;
      wr_c    <= '0;
      wr_slot <= '0;
      rd_oy   <= '0;
      rd_ox   <= '0;
      rd_done <= 1'b0;
    end else begin
      if (rd_done && int'(wr_r) == H) begin
        // Frame finished on both sides: start the next one.
        wr_r    <= '0;
        wr_c    <= '0;
        wr_slot <= '0;
        rd_done <= 1'b0;
      end else if (in_valid && in_ready) begin
        if (int'(wr_c) == W - 1) begin
          wr_c    <= '0;
          wr_r    <= wr_r + 1'b1;
          wr_slot <= (int'(wr_slot) == NB - 1) ? '0 : wr_slot + 1'b1;
        end else begin
          wr_c <= wr_c + 1'b1;
        end
      end
      if (out_valid && out_ready) begin
        if (int'(rd_ox) == OW - 1) begin
          rd_ox <= '0;
          if (int'(rd_oy) == OH - 1) begin
            rd_oy   <= '0;
            rd_done <= 1'b1;
          end else begin
            rd_oy <= rd_oy + 1'b1;
          end
        end else begin
          rd_ox <= rd_ox + 1'b1;
        end
      end
    end
  end
endmodule
