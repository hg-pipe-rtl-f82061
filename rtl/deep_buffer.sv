// deep_buffer: holds one whole K or V tensor (T tokens x C channels) of an
// image, so that every query token group can be multiplied with all of it.
//
// Write side: a valid/ready stream of WTP x WCP tiles in token-major order
// (token group outer, channel group inner), exactly as the Q/K/V generators
// produce them (element (t, c) at bits [(t*WCP + c)*ACT_W +: ACT_W]).  After
// the last tile, full rises and in_ready falls: the next image's tensor waits
// upstream in the deep FIFO.  A one-cycle release pulse from the consuming
// dymm empties the buffer again.
// Read side: combinational, a ROWS x COLS tile of the weight matrix W at row
// group rd_row and column group rd_col.  With TRANSPOSE = 0 (K buffer) W is
// the tensor itself, rows = tokens.  With TRANSPOSE = 1 (V buffer, the paper's
// "Transpose Module") W is its transpose, rows = channels and columns =
// tokens, so the tensor that was written token by token is read channel by
// channel.  The tensor is kept as an element array; how the paper banks it
// into BRAMs is not described, so the banking is left to synthesis.
module deep_buffer
  import hg_pkg::*;
#(
  parameter int  T         = 196,
  parameter int  C         = 64,
  parameter int  WTP       = 2,
  parameter int  WCP       = 4,
  parameter int  ROWS      = 7,
  parameter int  COLS      = 4,
  parameter bit  TRANSPOSE = 1'b0,
  localparam int NR        = (TRANSPOSE ? C : T) / ROWS,
  localparam int NC        = (TRANSPOSE ? T : C) / COLS,
  localparam int R_W       = (NR > 1) ? $clog2(NR) : 1,
  localparam int C_W       = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [WTP*WCP*ACT_W-1:0]     in_data,
  output logic                         full,
  input  logic                         release_buf,
  input  logic [R_W-1:0]               rd_row,
  input  logic [C_W-1:0]               rd_col,
  output logic [ROWS*COLS*ACT_W-1:0]   rd_data
);
  localparam int NTG  = T / WTP;
  localparam int NCG  = C / WCP;
  localparam int TG_W = (NTG > 1) ? $clog2(NTG) : 1;
  localparam int CG_W = (NCG > 1) ? $clog2(NCG) : 1;

  act_t            mem [T][C];
  logic [TG_W-1:0] wtg;
  logic [CG_W-1:0] wcg;
  logic            push;

  assign in_ready = !full;
  assign push     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (push)
      for (int t = 0; t < WTP; t++)
        for (int c = 0; c < WCP; c++)
          mem[int'(wtg) * WTP + t][int'(wcg) * WCP + c] <= act_t'(in_data[(t*WCP + c)*ACT_W +: ACT_W]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full <= 1'b0;
      wtg  <= '0;
      wcg  <= '0;
    end else begin
      if (release_buf) full <= 1'b0;
      if (push) begin
        if (wcg == CG_W'(NCG - 1)) begin
          wcg <= '0;
          if (wtg == TG_W'(NTG - 1)) begin
            wtg  <= '0;
            full <= 1'b1;
          end else begin
            wtg <= wtg + 1'b1;
          end
        end else begin
          wcg <= wcg + 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        if (TRANSPOSE)
          rd_data[(r*COLS + c)*ACT_W +: ACT_W] = mem[int'(rd_col) * COLS + c][int'(rd_row) * ROWS + r];
        else
          rd_data[(r*COLS + c)*ACT_W +: ACT_W] = mem[int'(rd_row) * ROWS + r][int'(rd_col) * COLS + c];
  end

  // The consumer may only release a tensor that is complete.
  a_release: assert property (@(posedge clk) disable iff (!rst_n) release_buf |-> full);
endmodule
