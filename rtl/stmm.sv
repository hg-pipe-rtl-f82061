// stmm: matrix multiply with static (on-chip) weights, y = x * w^T.
//
// Used for the Q/K/V generation, the attention output projection and the two
// MLP layers.  Output-stationary tiling as in the paper: TP tokens, CIP input
// channels and COP output channels per cycle; CIT = CI/CIP and COT = CO/COP
// trip counts.
//
// Stage 1 (line buffer) collects all CI channels of a group of TP tokens,
// IN_CP channels per input beat.  It is double-buffered per token group, so
// stage 1 fills one bank while stage 2 works on the other.
// Stage 2 (MAC) runs the loops "for cot: for cit:" over a full bank, one
// (cot, cit) step per cycle: TP x COP accumulators each add CIP products.
// After CIT steps the output tile (TP x COP) is registered and the next cot
// starts.  One token group therefore takes CIT * COT cycles and a tensor of
// TT token groups takes II = TT * CIT * COT cycles, the paper's formula.
// The tile is either the raw accumulators (OUT_RQ = 0, for stages followed by
// a table such as GeLU, softmax or the residual add) or 3-bit activations
// through a ReQuant table per lane (OUT_RQ = 1).
//
// Stream formats (element (t, c) at bits [(t*N + c)*W +: W], c fastest):
//   in_data  TP x IN_CP activations, token groups in order, channels ascending
//   out_data TP x COP outputs, for each token group cot = 0..COT-1
// Weights: the paper freezes them as ROMs; their values are not part of the
// design, so the buffer has a write port used once before inference.  Word
// cot*CIT + cit holds w[cot*COP + co][cit*CIP + ci] at bits
// [(co*CIP + ci)*W_W +: W_W].  The read is combinational (distributed ROM);
// the double-buffered line buffer and the load port are this design's choices.
module stmm
  import hg_pkg::*;
#(
  parameter int     TP       = 2,
  parameter int     CI       = 192,
  parameter int     CO       = 64,
  parameter int     CIP      = 6,
  parameter int     COP      = 4,
  parameter int     IN_CP    = 1,
  parameter bit     OUT_RQ   = 1'b1,
  parameter longint RQ_ALPHA = -128,
  parameter int     RQ_SHIFT = 2,
  parameter real    RQ_SCALE = 0.03125,
  localparam int    CIT      = CI / CIP,
  localparam int    COT      = CO / COP,
  localparam int    OUT_W    = OUT_RQ ? ACT_W : ACC_W,
  localparam int    WA_W     = (CIT * COT > 1) ? $clog2(CIT * COT) : 1,
  localparam int    WD_W     = COP * CIP * W_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [TP*IN_CP*ACT_W-1:0] in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [TP*COP*OUT_W-1:0]   out_data,
  input  logic                      wl_we,
  input  logic [WA_W-1:0]           wl_addr,
  input  logic [WD_W-1:0]           wl_data
);
  localparam int NWR  = CI / IN_CP;
  localparam int WC_W = (NWR > 1) ? $clog2(NWR) : 1;
  localparam int CT_W = (CIT > 1) ? $clog2(CIT) : 1;
  localparam int OT_W = (COT > 1) ? $clog2(COT) : 1;

  // ---------------- stage 1: line buffer ----------------
  act_t            lbuf [2][TP][CI];
  logic [1:0]      full;
  logic            wr_bank, rd_bank;
  logic [WC_W-1:0] wr_cnt;
  logic            push;

  assign in_ready = !full[wr_bank];
  assign push     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (push)
      for (int t = 0; t < TP; t++)
        for (int c = 0; c < IN_CP; c++)
          lbuf[wr_bank][t][int'(wr_cnt) * IN_CP + c] <= act_t'(in_data[(t*IN_CP + c)*ACT_W +: ACT_W]);
  end

  // ---------------- weight buffer ----------------
  logic [WD_W-1:0] wmem [CIT*COT];
  always_ff @(posedge clk) begin
    if (wl_we) wmem[wl_addr] <= wl_data;
  end

  // ---------------- stage 2: MAC ----------------
  logic [CT_W-1:0] cit;
  logic [OT_W-1:0] cot;
  acc_t            acc [TP][COP];
  acc_t            tot [TP][COP];
  logic [WD_W-1:0] wword;
  logic            out_free, last_ci, step;

  assign wword    = wmem[int'(cot) * CIT + int'(cit)];
  assign out_free = !out_valid || out_ready;
  assign last_ci  = (cit == CT_W'(CIT - 1));
  assign step     = full[rd_bank] && (!last_ci || out_free);

  always_comb begin
    for (int t = 0; t < TP; t++)
      for (int co = 0; co < COP; co++) begin
        tot[t][co] = (cit == '0) ? '0 : acc[t][co];
        for (int ci = 0; ci < CIP; ci++)
          tot[t][co] += acc_t'(lbuf[rd_bank][t][int'(cit) * CIP + ci]) *
                        acc_t'(wgt_t'(wword[(co*CIP + ci)*W_W +: W_W]));
      end
  end

  // output conversion, one lane per (t, co)
  logic [TP*COP*OUT_W-1:0] res;
  for (genvar t = 0; t < TP; t++) begin : g_t
    for (genvar co = 0; co < COP; co++) begin : g_co
      if (OUT_RQ) begin : g_rq
        requant_lut #(.IN_W(ACC_W), .ALPHA(RQ_ALPHA), .SHIFT(RQ_SHIFT), .SCALE(RQ_SCALE))
          u_rq (.x(tot[t][co]), .y(res[(t*COP + co)*OUT_W +: OUT_W]));
      end else begin : g_raw
        assign res[(t*COP + co)*OUT_W +: OUT_W] = OUT_W'(tot[t][co]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (step) acc <= tot;
    if (step && last_ci) out_data <= res;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full      <= '0;
      wr_bank   <= 1'b0;
      rd_bank   <= 1'b0;
      wr_cnt    <= '0;
      cit       <= '0;
      cot       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (push) begin
        if (wr_cnt == WC_W'(NWR - 1)) begin
          wr_cnt        <= '0;
          full[wr_bank] <= 1'b1;
          wr_bank       <= !wr_bank;
        end else begin
          wr_cnt <= wr_cnt + 1'b1;
        end
      end
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (step) begin
        if (last_ci) begin
          cit       <= '0;
          out_valid <= 1'b1;
          if (cot == OT_W'(COT - 1)) begin
            cot           <= '0;
            full[rd_bank] <= 1'b0;
            rd_bank       <= !rd_bank;
          end else begin
            cot <= cot + 1'b1;
          end
        end else begin
          cit <= cit + 1'b1;
        end
      end
    end
  end
endmodule
