// mlp_block: one MLP block of the ViT, a purely fine-grained pipeline.
//
//   in --+--> residual FIFO -------------------------------------+
//        +--> layernorm -> MatMul1 (stmm) -> gelu -> MatMul2 (stmm) -> residual_add -> out
//
// Every stage starts as soon as its first token group is complete, so the
// residual FIFO only has to cover the few token groups in flight (LayerNorm,
// and the double-buffered line buffers of both matrix multiplies), not a
// whole tensor.  MatMul1 hands raw accumulators to the fused GeLU-ReQuant
// table; MatMul2 hands raw accumulators to the residual add.
// Streams: in/out TP x 1 three-bit activations per beat.  Weight load:
// wl_unit 0 = MatMul1, 1 = MatMul2, stmm word format.
// Parallelism defaults are the paper's Deit-tiny design (MatMul1 and MatMul2
// 576 MACs each, II 50176; GeLU 4 lanes); RES_FIFO_DEPTH is this design's
// choice (8 token groups).
module mlp_block
  import hg_pkg::*;
#(
  parameter int TP      = 2,
  parameter int C       = 192,
  parameter int HID     = 768,
  parameter int M1_CIP  = 12,
  parameter int M1_COP  = 24,
  parameter int M2_CIP  = 24,
  parameter int M2_COP  = 12,
  parameter int GELU_CP = 2,
  parameter int RES_FIFO_DEPTH = 8 * C,
  localparam int M1_AW  = $clog2((C / M1_CIP) * (HID / M1_COP)),
  localparam int M2_AW  = $clog2((HID / M2_CIP) * (C / M2_COP)),
  localparam int WL_AW  = (M1_AW > M2_AW) ? M1_AW : M2_AW,
  localparam int M1_DW  = M1_CIP * M1_COP * W_W,
  localparam int M2_DW  = M2_CIP * M2_COP * W_W,
  localparam int WL_DW  = (M1_DW > M2_DW) ? M1_DW : M2_DW
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
  input  logic                wl_unit,
  input  logic [WL_AW-1:0]    wl_addr,
  input  logic [WL_DW-1:0]    wl_data
);
  logic res_in_ready, ln_in_ready;
  logic res_valid, res_ready;
  logic [TP*ACT_W-1:0] res_data;

  assign in_ready = res_in_ready && ln_in_ready;

  stream_fifo #(.W(TP*ACT_W), .DEPTH(RES_FIFO_DEPTH)) u_res_fifo (
    .clk, .rst_n,
    .in_valid(in_valid && in_ready), .in_ready(res_in_ready), .in_data(in_data),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_data), .count());

  logic ln_valid, ln_ready;
  logic [TP*ACT_W-1:0] ln_data;

  layernorm #(.TP(TP), .C(C)) u_ln (
    .clk, .rst_n,
    .in_valid(in_valid && in_ready), .in_ready(ln_in_ready), .in_data(in_data),
    .out_valid(ln_valid), .out_ready(ln_ready), .out_data(ln_data));

  logic m1_valid, m1_ready;
  logic [TP*M1_COP*ACC_W-1:0] m1_data;

  stmm #(.TP(TP), .CI(C), .CO(HID), .CIP(M1_CIP), .COP(M1_COP), .IN_CP(1), .OUT_RQ(1'b0)) u_mm1 (
    .clk, .rst_n,
    .in_valid(ln_valid), .in_ready(ln_ready), .in_data(ln_data),
    .out_valid(m1_valid), .out_ready(m1_ready), .out_data(m1_data),
    .wl_we(wl_we && !wl_unit), .wl_addr(wl_addr[M1_AW-1:0]), .wl_data(wl_data[M1_DW-1:0]));

  logic g_valid, g_ready;
  logic [TP*GELU_CP*ACT_W-1:0] g_data;

  gelu #(.TP(TP), .CP(GELU_CP), .IN_CP(M1_COP)) u_gelu (
    .clk, .rst_n,
    .in_valid(m1_valid), .in_ready(m1_ready), .in_data(m1_data),
    .out_valid(g_valid), .out_ready(g_ready), .out_data(g_data));

  logic m2_valid, m2_ready;
  logic [TP*M2_COP*ACC_W-1:0] m2_data;

  stmm #(.TP(TP), .CI(HID), .CO(C), .CIP(M2_CIP), .COP(M2_COP), .IN_CP(GELU_CP), .OUT_RQ(1'b0)) u_mm2 (
    .clk, .rst_n,
    .in_valid(g_valid), .in_ready(g_ready), .in_data(g_data),
    .out_valid(m2_valid), .out_ready(m2_ready), .out_data(m2_data),
    .wl_we(wl_we && wl_unit), .wl_addr(wl_addr[M2_AW-1:0]), .wl_data(wl_data[M2_DW-1:0]));

  residual_add #(.TP(TP), .IN_CP(M2_COP)) u_add (
    .clk, .rst_n,
    .in_valid(m2_valid), .in_ready(m2_ready), .in_data(m2_data),
    .res_valid(res_valid), .res_ready(res_ready), .res_data(res_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data));
endmodule
