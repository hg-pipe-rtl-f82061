// requant_lut: ReQuant (Eq. 3) as a 64-entry table, no multiplier.
//
// A wide integer x is mapped to a 3-bit activation.  The index is the
// power-of-two approximation of the scaling step, idx = clamp((x - ALPHA) >>
// SHIFT, 0, 63); the table holds clamp(round(x_mid * SCALE)) for the centre of
// each bin.  Inputs outside [ALPHA, ALPHA + 64 * 2^SHIFT) fall into the end
// entries, which is where the clamp of Eq. 3 would put them anyway.
// Purely combinational; table size and 3-bit output follow the paper, the
// calibration constants (ALPHA, SHIFT, SCALE) are per-instance parameters whose
// defaults are this design's choice.
module requant_lut
  import hg_pkg::*;
#(
  parameter int     IN_W  = ACC_W,
  parameter longint ALPHA = -128,
  parameter int     SHIFT = 2,
  parameter real    SCALE = 0.03125
) (
  input  logic signed [IN_W-1:0] x,
  output act_t                   y
);
  localparam act_tab_t TAB = requant_tab(ALPHA, SHIFT, SCALE);

  tidx_t idx;
  always_comb begin
    idx = pot_index(IDX_W'(x), IDX_W'(ALPHA), SHIFT);
    y   = TAB[idx];
  end
endmodule
