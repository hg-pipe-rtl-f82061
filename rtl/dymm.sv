// dymm: matrix multiply with dynamic weights, used for Q x K^T and R x V.
//
// Same two-stage, output-stationary structure as stmm, but the "weights" are
// a tensor produced earlier in the same image (K, or V transposed) held in a
// deep_buffer.  The weight matrix W has CO rows and CI columns; in each MAC
// step (cot, cit) this module drives wt_cot/wt_cit and reads the COP x CIP
// tile W[cot*COP + co][cit*CIP + ci] on wt_data in the same cycle (element
// (co, ci) at bits [(co*CIP + ci)*ACT_W +: ACT_W]).
//
// Stage 1 buffers all CI input channels of TP tokens (the Q or R rows) in a
// double-buffered line buffer, IN_CP channels per beat.  Stage 2 only runs
// while buf_full says the whole dynamic tensor is present: this is the
// coarse-grained dependency of attention.  After the last output tile of the
// last of TT token groups it pulses buf_release for one cycle, so the buffer
// can take the next image's tensor.  Per token group the MAC takes CIT * COT
// cycles, II = TT * CIT * COT (43904 for both attention products).
// Output: TP x COP raw accumulators (OUT_RQ = 0, scores for softmax) or 3-bit
// activations through ReQuant tables (OUT_RQ = 1, the R x V result).
module dymm
  import hg_pkg::*;
#(
  parameter int     TP       = 2,
  parameter int     TT       = 98,
  parameter int     CI       = 64,
  parameter int     CO       = 196,
  parameter int     CIP      = 4,
  parameter int     COP      = 7,
  parameter int     IN_CP    = 4,
  parameter bit     OUT_RQ   = 1'b0,
  parameter longint RQ_ALPHA = -128,
  parameter int     RQ_SHIFT = 2,
  parameter real    RQ_SCALE = 0.03125,
  localparam int    CIT      = CI / CIP,
  localparam int    COT      = CO / COP,
  localparam int    OUT_W    = OUT_RQ ? ACT_W : ACC_W,
  localparam int    CT_W     = (CIT > 1) ? $clog2(CIT) : 1,
  localparam int    OT_W     = (COT > 1) ? $clog2(COT) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [TP*IN_CP*ACT_W-1:0] in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [TP*COP*OUT_W-1:0]   out_data,
  input  logic                      buf_full,
  output logic                      buf_release,
  output logic [OT_W-1:0]           wt_cot,
  output logic [CT_W-1:0]           wt_cit,
  input  logic [COP*CIP*ACT_W-1:0]  wt_data
);
  localparam int NWR  = CI / IN_CP;
  localparam int WC_W = (NWR > 1) ? $clog2(NWR) : 1;
  localparam int TG_W = (TT > 1) ? $clog2(TT) : 1;

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

  // ---------------- stage 2: MAC against the deep buffer ----------------
  logic [CT_W-1:0] cit;
  logic [OT_W-1:0] cot;
  logic [TG_W-1:0] tg;
  acc_t            acc [TP][COP];
  acc_t            tot [TP][COP];
  logic            out_free, last_ci, last_tile, step;

  assign wt_cot    = cot;
  assign wt_cit    = cit;
  assign out_free  = !out_valid || out_ready;
  assign last_ci   = (cit == CT_W'(CIT - 1));
  assign last_tile = last_ci && (cot == OT_W'(COT - 1));
  assign step      = full[rd_bank] && buf_full && (!last_ci || out_free);
  assign buf_release = step && last_tile && (tg == TG_W'(TT - 1));

  always_comb begin
    for (int t = 0; t < TP; t++)
      for (int co = 0; co < COP; co++) begin
        tot[t][co] = (cit == '0) ? '0 : acc[t][co];
        for (int ci = 0; ci < CIP; ci++)
          tot[t][co] += acc_t'(lbuf[rd_bank][t][int'(cit) * CIP + ci]) *
                        acc_t'(act_t'(wt_data[(co*CIP + ci)*ACT_W +: ACT_W]));
      end
  end

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
      tg        <= '0;
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
            tg            <= (tg == TG_W'(TT - 1)) ? '0 : tg + 1'b1;
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
