// exp_lut: inverted exponent table for softmax (Eq. 8).
//
// Softmax subtracts the row maximum, so the interesting end of the exponent is
// at zero.  The index therefore counts down from the maximum:
// idx = clamp(diff >> SHIFT, 0, 63) with diff = max - x >= 0, and entry i holds
// round(255 * exp(-(i * 2^SHIFT) * IN_SCALE)).  Entry 0 is exactly 255 (the
// row maximum always maps to exp(0) = 1).  64 x 8-bit as in the paper; SHIFT
// and IN_SCALE (real value of one score unit) are calibration defaults of this
// design.  Combinational.
module exp_lut
  import hg_pkg::*;
#(
  parameter int  DIFF_W   = ACC_W + 1,
  parameter int  SHIFT    = 3,
  parameter real IN_SCALE = 0.0625
) (
  input  logic [DIFF_W-1:0] diff,
  output logic [7:0]        e
);
  localparam u8_tab_t TAB = exp_tab(SHIFT, IN_SCALE);

  tidx_t idx;
  always_comb begin
    idx = pot_index(IDX_W'(diff), '0, SHIFT);
    e   = TAB[idx];
  end
endmodule
