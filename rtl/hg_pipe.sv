// hg_pipe: the complete encoder of a Deit-tiny Vision Transformer as one
// streaming pipeline, LAYERS x (attention block, MLP block).
//
// Every block, and every operator inside a block, has its own hardware and
// its own small controller; there is no shared engine and no global
// schedule.  Blocks talk only through valid/ready streams with a FIFO on each
// link, so an image flows in tile by tile (TP tokens x 1 channel per beat,
// token groups in order, channels ascending) and leaves the same way, and
// the next image can enter while earlier ones are still inside.  All weights
// live on chip; nothing but the input and output tensors moves off chip.
//
// Ports: in_* carries the embedded tokens (the patch embedding and the
// classification head are outside this module), out_* the encoder output.
// wl_* loads the weight buffers once before inference: wl_layer picks the
// layer, wl_mlp the MLP (1) or attention (0) block, wl_unit the matrix inside
// it (see mha_block and mlp_block), wl_addr/wl_data one weight word in the
// stmm format (low bits used).
// Defaults are the paper's main configuration: 12 layers, 196 tokens, 192
// channels, 3 heads of 64, MLP width 768, 3-bit weights and activations.
// The link FIFO depth is this design's choice.
module hg_pipe
  import hg_pkg::*;
#(
  parameter int LAYERS     = 12,
  parameter int T          = 196,
  parameter int TP         = 2,
  parameter int C          = 192,
  parameter int H          = 3,
  parameter int DH         = 64,
  parameter int HID        = 768,
  parameter int LINK_DEPTH = 16,
  localparam int L_W       = (LAYERS > 1) ? $clog2(LAYERS) : 1,
  localparam int MHA_AW    = $clog2((C / 6) * (DH / 4)) > $clog2((C / 12) * (C / 6))
                             ? $clog2((C / 6) * (DH / 4)) : $clog2((C / 12) * (C / 6)),
  localparam int MLP_AW    = $clog2((C / 12) * (HID / 24)) > $clog2((HID / 24) * (C / 12))
                             ? $clog2((C / 12) * (HID / 24)) : $clog2((HID / 24) * (C / 12)),
  localparam int WL_AW     = (MHA_AW > MLP_AW) ? MHA_AW : MLP_AW,
  localparam int WL_DW     = 12 * 24 * W_W,
  localparam int U_W       = $clog2(3 * H + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [TP*ACT_W-1:0] in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [TP*ACT_W-1:0] out_data,
  input  logic                wl_we,
  input  logic [L_W-1:0]      wl_layer,
  input  logic                wl_mlp,
  input  logic [U_W-1:0]      wl_unit,
  input  logic [WL_AW-1:0]    wl_addr,
  input  logic [WL_DW-1:0]    wl_data
);
  localparam int SW = TP * ACT_W;

  // link k: 0 = pipeline input, 2l+1 = after attention l, 2l+2 = after MLP l
  logic          lv [2*LAYERS+1];
  logic          lr [2*LAYERS+1];
  logic [SW-1:0] ld [2*LAYERS+1];

  assign lv[0]    = in_valid;
  assign in_ready = lr[0];
  assign ld[0]    = in_data;

  for (genvar l = 0; l < LAYERS; l++) begin : g_layer
    logic          fa_v, fa_r, fm_v, fm_r;
    logic [SW-1:0] fa_d, fm_d;

    // FIFO on the link into the attention block
    stream_fifo #(.W(SW), .DEPTH(LINK_DEPTH)) u_link_a (
      .clk, .rst_n,
      .in_valid(lv[2*l]), .in_ready(lr[2*l]), .in_data(ld[2*l]),
      .out_valid(fa_v), .out_ready(fa_r), .out_data(fa_d), .count());

    mha_block #(.T(T), .TP(TP), .C(C), .H(H), .DH(DH)) u_mha (
      .clk, .rst_n,
      .in_valid(fa_v), .in_ready(fa_r), .in_data(fa_d),
      .out_valid(lv[2*l+1]), .out_ready(lr[2*l+1]), .out_data(ld[2*l+1]),
      .wl_we(wl_we && !wl_mlp && (wl_layer == L_W'(l))), .wl_unit(wl_unit),
      .wl_addr(wl_addr[MHA_AW-1:0]), .wl_data(wl_data[12*6*W_W-1:0]));

    // FIFO on the link into the MLP block
    stream_fifo #(.W(SW), .DEPTH(LINK_DEPTH)) u_link_m (
      .clk, .rst_n,
      .in_valid(lv[2*l+1]), .in_ready(lr[2*l+1]), .in_data(ld[2*l+1]),
      .out_valid(fm_v), .out_ready(fm_r), .out_data(fm_d), .count());

    mlp_block #(.TP(TP), .C(C), .HID(HID)) u_mlp (
      .clk, .rst_n,
      .in_valid(fm_v), .in_ready(fm_r), .in_data(fm_d),
      .out_valid(lv[2*l+2]), .out_ready(lr[2*l+2]), .out_data(ld[2*l+2]),
      .wl_we(wl_we && wl_mlp && (wl_layer == L_W'(l))), .wl_unit(wl_unit[0]),
      .wl_addr(wl_addr[MLP_AW-1:0]), .wl_data(wl_data));
  end

  assign out_valid        = lv[2*LAYERS];
  assign lr[2*LAYERS]     = out_ready;
  assign out_data         = ld[2*LAYERS];
endmodule
