// mha_block: one multi-head attention block of the ViT as a hybrid-grained
// pipeline.
//
// Dataflow (all links are valid/ready streams):
//
//   in --+--> residual deep FIFO ------------------------------+
//        |                                                     v
//        +--> layernorm --+--> per head h (H heads):       residual_add --> out
//                         |     Q gen (stmm) -> Q deep FIFO --> QK dymm     ^
//                         |     K gen (stmm) -> K deep FIFO -> K deep_buffer |
//                         |     V gen (stmm) -> V deep FIFO -> V deep_buffer |
//                         |                       (transposed)               |
//                         |     QK dymm -> softmax -> RV dymm -> head FIFO   |
//                         +--> head concat -> output projection (stmm) ------+
//
// Fine-grained parts (LayerNorm, Q/K/V generation, output projection,
// residual add) work tile by tile as soon as data arrive.  The coarse-grained
// part is the attention itself: QK and RV cannot start before the whole K and
// V tensors of the image sit in their deep buffers.  Meanwhile the Q tiles and
// the residual wait in deep FIFOs, and the next image's K and V wait in their
// deep FIFOs until the buffers are released.  Only one residual tensor is
// buffered, instead of one per pipeline stage in a ping-pong design.
//
// Streams: in/out are TP x 1 three-bit activations per beat (token groups in
// order, channels ascending).  Weight load: wl_unit 3h+0/1/2 selects the Q/K/V
// generator of head h, wl_unit 3H the output projection; address and data
// follow the stmm word format, data in the low bits of wl_data.
// Parallelism defaults are the paper's Deit-tiny design.  The FIFO depths are
// derived here from the condition that no branch can deadlock (Q FIFO and the
// residual FIFO hold a whole image); the paper quotes 512 as a typical deep
// FIFO depth but does not list each one.  The head concat order (head 0's
// channels first) is this design's choice.
module mha_block
  import hg_pkg::*;
#(
  parameter int T       = 196,
  parameter int TP      = 2,
  parameter int C       = 192,
  parameter int H       = 3,
  parameter int DH      = 64,
  parameter int QKV_CIP = 6,
  parameter int QKV_COP = 4,
  parameter int QK_CIP  = 4,
  parameter int QK_COP  = 7,
  parameter int RV_CIP  = 7,
  parameter int RV_COP  = 4,
  parameter int PJ_CIP  = 12,
  parameter int PJ_COP  = 6,
  parameter int QKV_FIFO_DEPTH = (T / TP) * (DH / QKV_COP),
  parameter int RES_FIFO_DEPTH = (T / TP) * C + 64,
  parameter int HEAD_FIFO_DEPTH = 32,
  localparam int NU     = 3 * H + 1,
  localparam int U_W    = $clog2(NU),
  localparam int QKV_AW = $clog2((C / QKV_CIP) * (DH / QKV_COP)),
  localparam int PJ_AW  = $clog2((C / PJ_CIP) * (C / PJ_COP)),
  localparam int WL_AW  = (QKV_AW > PJ_AW) ? QKV_AW : PJ_AW,
  localparam int QKV_DW = QKV_CIP * QKV_COP * W_W,
  localparam int PJ_DW  = PJ_CIP * PJ_COP * W_W,
  localparam int WL_DW  = (QKV_DW > PJ_DW) ? QKV_DW : PJ_DW
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
  input  logic [U_W-1:0]      wl_unit,
  input  logic [WL_AW-1:0]    wl_addr,
  input  logic [WL_DW-1:0]    wl_data
);
  localparam int TT    = T / TP;
  localparam int QT_W  = TP * QKV_COP * ACT_W;   // one Q/K/V tile
  localparam int QK_RW = (T / QK_COP > 1) ? $clog2(T / QK_COP) : 1;
  localparam int QK_CW = (DH / QK_CIP > 1) ? $clog2(DH / QK_CIP) : 1;
  localparam int RV_RW = (DH / RV_COP > 1) ? $clog2(DH / RV_COP) : 1;
  localparam int RV_CW = (T / RV_CIP > 1) ? $clog2(T / RV_CIP) : 1;
  localparam int HT_W  = TP * RV_COP * ACT_W;    // one head output tile
  localparam int NHT   = DH / RV_COP;            // head tiles per token group
  localparam int HC_W  = (NHT > 1) ? $clog2(NHT) : 1;
  localparam int HS_W  = (H > 1) ? $clog2(H) : 1;

  // ---------------- input fork: residual FIFO and LayerNorm ----------------
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

  // ---------------- LayerNorm output broadcast to 3H generators ------------
  logic [3*H-1:0] gen_ready;
  assign ln_ready = &gen_ready;

  logic [H-1:0]      hout_valid, hout_ready;
  logic [HT_W-1:0]   hout_data [H];

  for (genvar h = 0; h < H; h++) begin : g_head
    logic [2:0]       g_valid, g_ready;
    logic [QT_W-1:0]  g_data [3];
    logic [2:0]       f_valid, f_ready;
    logic [QT_W-1:0]  f_data [3];

    for (genvar u = 0; u < 3; u++) begin : g_gen
      stmm #(.TP(TP), .CI(C), .CO(DH), .CIP(QKV_CIP), .COP(QKV_COP), .IN_CP(1), .OUT_RQ(1'b1)) u_gen (
        .clk, .rst_n,
        .in_valid(ln_valid && ln_ready), .in_ready(gen_ready[3*h + u]), .in_data(ln_data),
        .out_valid(g_valid[u]), .out_ready(g_ready[u]), .out_data(g_data[u]),
        .wl_we(wl_we && (wl_unit == U_W'(3*h + u))), .wl_addr(wl_addr[QKV_AW-1:0]),
        .wl_data(wl_data[QKV_DW-1:0]));

      stream_fifo #(.W(QT_W), .DEPTH(QKV_FIFO_DEPTH)) u_fifo (
        .clk, .rst_n,
        .in_valid(g_valid[u]), .in_ready(g_ready[u]), .in_data(g_data[u]),
        .out_valid(f_valid[u]), .out_ready(f_ready[u]), .out_data(f_data[u]), .count());
    end

    // K and V deep buffers
    logic k_full, k_release, v_full, v_release;
    logic [QK_RW-1:0] k_row;
    logic [QK_CW-1:0] k_col;
    logic [RV_RW-1:0] v_row;
    logic [RV_CW-1:0] v_col;
    logic [QK_COP*QK_CIP*ACT_W-1:0] k_tile;
    logic [RV_COP*RV_CIP*ACT_W-1:0] v_tile;

    deep_buffer #(.T(T), .C(DH), .WTP(TP), .WCP(QKV_COP), .ROWS(QK_COP), .COLS(QK_CIP),
                  .TRANSPOSE(1'b0)) u_kbuf (
      .clk, .rst_n,
      .in_valid(f_valid[1]), .in_ready(f_ready[1]), .in_data(f_data[1]),
      .full(k_full), .release_buf(k_release),
      .rd_row(k_row), .rd_col(k_col), .rd_data(k_tile));

    deep_buffer #(.T(T), .C(DH), .WTP(TP), .WCP(QKV_COP), .ROWS(RV_COP), .COLS(RV_CIP),
                  .TRANSPOSE(1'b1)) u_vbuf (
      .clk, .rst_n,
      .in_valid(f_valid[2]), .in_ready(f_ready[2]), .in_data(f_data[2]),
      .full(v_full), .release_buf(v_release),
      .rd_row(v_row), .rd_col(v_col), .rd_data(v_tile));

    // Q x K^T -> softmax -> R x V
    logic s_valid, s_ready;
    logic [TP*QK_COP*ACC_W-1:0] s_data;
    logic r_valid, r_ready;
    logic [TP*ACT_W-1:0] r_data;
    logic a_valid, a_ready;
    logic [HT_W-1:0] a_data;

    dymm #(.TP(TP), .TT(TT), .CI(DH), .CO(T), .CIP(QK_CIP), .COP(QK_COP), .IN_CP(QKV_COP),
           .OUT_RQ(1'b0)) u_qk (
      .clk, .rst_n,
      .in_valid(f_valid[0]), .in_ready(f_ready[0]), .in_data(f_data[0]),
      .out_valid(s_valid), .out_ready(s_ready), .out_data(s_data),
      .buf_full(k_full), .buf_release(k_release),
      .wt_cot(k_row), .wt_cit(k_col), .wt_data(k_tile));

    softmax #(.TP(TP), .N(T), .IN_CP(QK_COP)) u_sm (
      .clk, .rst_n,
      .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data),
      .out_valid(r_valid), .out_ready(r_ready), .out_data(r_data));

    dymm #(.TP(TP), .TT(TT), .CI(T), .CO(DH), .CIP(RV_CIP), .COP(RV_COP), .IN_CP(1),
           .OUT_RQ(1'b1)) u_rv (
      .clk, .rst_n,
      .in_valid(r_valid), .in_ready(r_ready), .in_data(r_data),
      .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data),
      .buf_full(v_full), .buf_release(v_release),
      .wt_cot(v_row), .wt_cit(v_col), .wt_data(v_tile));

    stream_fifo #(.W(HT_W), .DEPTH(HEAD_FIFO_DEPTH)) u_hfifo (
      .clk, .rst_n,
      .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data),
      .out_valid(hout_valid[h]), .out_ready(hout_ready[h]), .out_data(hout_data[h]), .count());
  end

  // ---------------- head concat: head 0 channels, head 1, ... --------------
  logic [HS_W-1:0] hsel;
  logic [HC_W-1:0] hcnt;
  logic            pj_in_valid, pj_in_ready;
  logic [HT_W-1:0] pj_in_data;

  always_comb begin
    pj_in_valid = hout_valid[hsel];
    pj_in_data  = hout_data[hsel];
    hout_ready  = '0;
    hout_ready[hsel] = pj_in_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hsel <= '0;
      hcnt <= '0;
    end else if (pj_in_valid && pj_in_ready) begin
      if (hcnt == HC_W'(NHT - 1)) begin
        hcnt <= '0;
        hsel <= (hsel == HS_W'(H - 1)) ? '0 : hsel + 1'b1;
      end else begin
        hcnt <= hcnt + 1'b1;
      end
    end
  end

  // ---------------- output projection and residual add ---------------------
  logic pj_valid, pj_ready;
  logic [TP*PJ_COP*ACC_W-1:0] pj_data;

  stmm #(.TP(TP), .CI(C), .CO(C), .CIP(PJ_CIP), .COP(PJ_COP), .IN_CP(RV_COP), .OUT_RQ(1'b0)) u_proj (
    .clk, .rst_n,
    .in_valid(pj_in_valid), .in_ready(pj_in_ready), .in_data(pj_in_data),
    .out_valid(pj_valid), .out_ready(pj_ready), .out_data(pj_data),
    .wl_we(wl_we && (wl_unit == U_W'(3*H))), .wl_addr(wl_addr[PJ_AW-1:0]),
    .wl_data(wl_data[PJ_DW-1:0]));

  residual_add #(.TP(TP), .IN_CP(PJ_COP)) u_add (
    .clk, .rst_n,
    .in_valid(pj_valid), .in_ready(pj_ready), .in_data(pj_data),
    .res_valid(res_valid), .res_ready(res_ready), .res_data(res_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data));
endmodule
