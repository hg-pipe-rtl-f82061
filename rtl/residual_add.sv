// residual_add: adds the residual branch to a block's output and requantises.
//
// The block output arrives as TP x IN_CP raw accumulators from the output
// projection or MatMul2; the residual arrives as TP x 1 three-bit activations
// from the deep FIFO of the residual path.  Each accepted tile is split into
// IN_CP beats; every beat combines one residual beat:
//   out_t = requant_lut((res_t << RES_SHIFT) + acc_t)
// giving TP x 1 three-bit activations per cycle (II = TT * C = 18816 cycles
// at the paper's sizes, a stage that is idle part of the time, as the paper
// notes).  The left shift aligns the residual scale with the accumulator
// scale; it and the table calibration are this design's choices, the paper
// gives only the add and its parallelism.  out_valid needs both a held tile
// and a residual word; the residual is popped with each output beat.
module residual_add
  import hg_pkg::*;
#(
  parameter int     TP        = 2,
  parameter int     IN_CP     = 6,
  parameter int     RES_SHIFT = 5,
  parameter longint RQ_ALPHA  = -512,
  parameter int     RQ_SHIFT  = 4,
  parameter real    RQ_SCALE  = 0.03125
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [TP*IN_CP*ACC_W-1:0] in_data,
  input  logic                      res_valid,
  output logic                      res_ready,
  input  logic [TP*ACT_W-1:0]       res_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [TP*ACT_W-1:0]       out_data
);
  localparam int K_W = (IN_CP > 1) ? $clog2(IN_CP) : 1;

  logic [TP*IN_CP*ACC_W-1:0] hold;
  logic                      busy;
  logic [K_W-1:0]            k;
  logic                      in_fire, out_fire, last_k;
  acc_t                      sum [TP];

  assign last_k    = (k == K_W'(IN_CP - 1));
  assign out_valid = busy && res_valid;
  assign out_fire  = out_valid && out_ready;
  assign res_ready = busy && out_ready;
  assign in_ready  = !busy || (out_fire && last_k);
  assign in_fire   = in_valid && in_ready;

  for (genvar t = 0; t < TP; t++) begin : g_lane
    assign sum[t] = (acc_t'(act_t'(res_data[t*ACT_W +: ACT_W])) <<< RES_SHIFT) +
                    acc_t'(hold[(t*IN_CP + int'(k))*ACC_W +: ACC_W]);
    requant_lut #(.IN_W(ACC_W), .ALPHA(RQ_ALPHA), .SHIFT(RQ_SHIFT), .SCALE(RQ_SCALE))
      u_rq (.x(sum[t]), .y(out_data[t*ACT_W +: ACT_W]));
  end

  always_ff @(posedge clk) begin
    if (in_fire) hold <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      k    <= '0;
    end else begin
      if (out_fire) k <= last_k ? '0 : k + 1'b1;
      if (in_fire) busy <= 1'b1;
      else if (out_fire && last_k) busy <= 1'b0;
    end
  end
endmodule
