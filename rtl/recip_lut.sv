// recip_lut: segmented reciprocal table for the softmax denominator.
//
// The reciprocal is steep at the low end of its range, so the range
// [ALPHA, BETA] is cut at the first eighth (the pivot).  Each part owns a
// 64-entry table with its own power-of-two step: the steep part gets a fine
// step, the flat part a coarse one.  x below the pivot reads segment 0 at
// (x - ALPHA) >> S0, otherwise segment 1 at (x - PIVOT) >> S1.  Entries are
// round(NUM / x_mid) saturated to 8 bits.  The 2 x 64 x 8 organisation and the
// 1/8 pivot follow the paper; the integer range (sums of 8-bit exponents) and
// NUM are this design's choice.  Combinational.
module recip_lut
  import hg_pkg::*;
#(
  parameter int     X_W   = 32,
  parameter longint ALPHA = 255,
  parameter longint BETA  = 196 * 255,
  parameter real    NUM   = 65025.0
) (
  input  logic [X_W-1:0] x,
  output logic [7:0]     r
);
  localparam longint PIVOT = ALPHA + (BETA - ALPHA) / 8;
  localparam int     S0    = pot_shift(PIVOT - ALPHA);
  localparam int     S1    = pot_shift(BETA - PIVOT);
  localparam u8_tab_t TAB0 = recip_tab(ALPHA, S0, NUM);
  localparam u8_tab_t TAB1 = recip_tab(PIVOT, S1, NUM);

  tidx_t idx;
  logic  seg;
  always_comb begin
    seg = (IDX_W'(x) >= IDX_W'(PIVOT));
    idx = seg ? pot_index(IDX_W'(x), IDX_W'(PIVOT), S1)
              : pot_index(IDX_W'(x), IDX_W'(ALPHA), S0);
    r   = seg ? TAB1[idx] : TAB0[idx];
  end
endmodule
