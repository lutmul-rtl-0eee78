// stream_fifo: activation FIFO placed between two layers.
//
// Synchronous first-word-fall-through FIFO of DEPTH entries of WIDTH bits with
// valid/ready on both sides: in_ready = not full, out_valid = not empty,
// out_data shows the oldest entry. A write and a read may happen in the same
// cycle, also when full (the read frees the slot only at the clock edge, so a
// full FIFO still refuses the write in that cycle). count gives the occupancy.
// Lint note: the shared package's activation width ABITS is not needed here
// and is reported as an unused parameter when this module is checked alone.
module stream_fifo #(
  parameter int WIDTH = 128,
  parameter int DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH <= 1) ? 1 : $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic             push, pop;

  assign in_ready  = (int'(count) < DEPTH);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) if (push) mem[wr_ptr] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (int'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (int'(rd_ptr) == DEPTH - 1) ? '0 : rd_ptr + 1'b1;
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  logic chk_en;   // assertions are checked once reset has been released
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;
  property p_in_hold;
    @(posedge clk) disable iff (!chk_en) (in_valid && !in_ready) |=> in_valid;
  endproperty
  a_in_hold: assert property (p_in_hold) else $error("producer dropped valid before ready");
endmodule
