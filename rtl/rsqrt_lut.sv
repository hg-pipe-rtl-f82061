// rsqrt_lut: reciprocal square root table for LayerNorm.
//
// The LayerNorm variance sum x (non-negative) is turned into
// r = NUM / sqrt(x) with a 64-entry table of 12-bit values, addressed by the
// power-of-two index clamp((x - ALPHA) >> SHIFT, 0, 63) and sampled at bin
// centres.  The 64 x 12 size follows the paper; the range and NUM are
// calibration parameters of this design.  Combinational.
module rsqrt_lut
  import hg_pkg::*;
#(
  parameter int     X_W   = 40,
  parameter longint ALPHA = 0,
  parameter int     SHIFT = 21,
  parameter real    NUM   = 7264320.0
) (
  input  logic [X_W-1:0] x,
  output logic [11:0]    r
);
  localparam u12_tab_t TAB = rsqrt_tab(ALPHA, SHIFT, NUM);

  tidx_t idx;
  always_comb begin
    idx = pot_index(IDX_W'(x), IDX_W'(ALPHA), SHIFT);
    r   = TAB[idx];
  end
endmodule
