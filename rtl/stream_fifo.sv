// stream_fifo: valid/ready FIFO used between every pair of pipeline stages
// and, with a large DEPTH, as the "deep FIFO" on the residual, Q, K and V
// branches of the attention block.
//
// A circular buffer of DEPTH words (any DEPTH >= 1, not only powers of two)
// with first-word fall-through: out_data shows the oldest word whenever
// out_valid is high.  A word is pushed when in_valid && in_ready and popped
// when out_valid && out_ready; both can happen in the same cycle.  in_ready
// and out_valid depend only on the occupancy, never on the other side's
// handshake, so a FIFO breaks every combinational path between stages.  The
// paper says only that FIFOs decouple the stages and that deep FIFOs are
// typically 512 deep; the structure here is this design's.
module stream_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 512
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0]               in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [W-1:0]               out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH + 1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic          push, pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= nxt(wr_ptr);
      if (pop)  rd_ptr <= nxt(rd_ptr);
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  // Stream rule for the producer: once offered, a word stays until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           in_valid && !in_ready |=> in_valid && $stable(in_data));
endmodule
