// gelu: streaming GeLU fused with the following ReQuant.
//
// MatMul1 delivers tiles of TP x IN_CP raw accumulators; this unit takes one
// tile, then emits it as IN_CP/CP beats of TP x CP three-bit activations
// (TP * CP = 4 table lookups per cycle, II = TT * CH / CP = 37632 cycles at
// the paper's sizes).  Each lookup is a single 64-entry table that samples
// the combined curve ReQuant(GeLU(x)) at power-of-two spaced points, so
// neither GeLU nor the quantiser needs arithmetic.  A new tile is accepted in
// the cycle the last beat of the previous one leaves, so the unit never
// idles while input is waiting.  Fusion, table size and parallelism follow
// the paper; the sampled range (ALPHA, SHIFT), the scale of the
// accumulators (IN_SCALE) and the output scale are this design's defaults.
module gelu
  import hg_pkg::*;
#(
  parameter int     TP        = 2,
  parameter int     CP        = 2,
  parameter int     IN_CP     = 24,
  parameter longint ALPHA     = -256,
  parameter int     SHIFT     = 3,
  parameter real    IN_SCALE  = 0.03125,
  parameter real    OUT_SCALE = 1.0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [TP*IN_CP*ACC_W-1:0] in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [TP*CP*ACT_W-1:0]    out_data
);
  localparam int       NB  = IN_CP / CP;
  localparam int       K_W = (NB > 1) ? $clog2(NB) : 1;
  localparam act_tab_t TAB = gelu_tab(ALPHA, SHIFT, IN_SCALE, OUT_SCALE);

  logic [TP*IN_CP*ACC_W-1:0] hold;
  logic                      busy;
  logic [K_W-1:0]            k;
  logic                      in_fire, out_fire, last_k;

  assign last_k    = (k == K_W'(NB - 1));
  assign out_valid = busy;
  assign out_fire  = out_valid && out_ready;
  assign in_ready  = !busy || (out_fire && last_k);
  assign in_fire   = in_valid && in_ready;

  always_comb begin
    for (int t = 0; t < TP; t++)
      for (int c = 0; c < CP; c++)
        out_data[(t*CP + c)*ACT_W +: ACT_W] =
          TAB[pot_index(IDX_W'(acc_t'(hold[(t*IN_CP + int'(k)*CP + c)*ACC_W +: ACC_W])),
                        IDX_W'(ALPHA), SHIFT)];
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
