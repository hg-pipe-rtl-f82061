// softmax: row softmax over N attention scores for TP query tokens at once.
//
// Input: raw Q x K^T accumulators, TP x IN_CP per beat, a row of N scores per
// token, rows grouped by TP tokens.  Each row group goes into a
// double-buffered row buffer, then three passes of N cycles run over it (the
// paper's "three passes", II = TT * N * 3 = 57624 cycles for a 196-token
// image, the slowest stage of the pipeline):
//   pass 0  m   = max_j x_j
//   pass 1  s   = sum_j e_j,   e_j = exp_lut(m - x_j)  (inverted exponent)
//   pass 2  out = clamp((e_j * recip_lut(s)) >> R_SHIFT, 0, QMAX)
// The exponent table is re-read in pass 2 instead of storing e_j.  Output:
// TP x 1 three-bit probabilities per beat, one per cycle while not stalled.
// The three passes and the two tables follow the paper; the quantisation of
// the probability (R_SHIFT) and the table calibration are this design's.
module softmax
  import hg_pkg::*;
#(
  parameter int  TP        = 2,
  parameter int  N         = 196,
  parameter int  IN_CP     = 7,
  parameter int  EXP_SHIFT = 3,
  parameter real EXP_SCALE = 0.0625,
  parameter real RECIP_NUM = 65025.0,
  parameter int  R_SHIFT   = 14
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [TP*IN_CP*ACC_W-1:0] in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [TP*ACT_W-1:0]       out_data
);
  localparam int NWR  = N / IN_CP;
  localparam int WC_W = (NWR > 1) ? $clog2(NWR) : 1;
  localparam int I_W  = (N > 1) ? $clog2(N) : 1;

  acc_t            rb [2][TP][N];
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
          rb[wr_bank][t][int'(wr_cnt) * IN_CP + c] <= acc_t'(in_data[(t*IN_CP + c)*ACC_W +: ACC_W]);
  end

  logic [1:0]     pass;
  logic [I_W-1:0] i;
  acc_t           mx [TP];
  logic [31:0]    sm [TP];
  logic [ACC_W:0] diff [TP];
  logic [7:0]     e [TP];
  logic [7:0]     r [TP];
  logic [15:0]    prod [TP];
  logic           out_free, step, last_i;
  logic [TP*ACT_W-1:0] q;

  assign out_free = !out_valid || out_ready;
  assign step     = full[rd_bank] && ((pass != 2'd2) || out_free);
  assign last_i   = (i == I_W'(N - 1));

  for (genvar t = 0; t < TP; t++) begin : g_lane
    assign diff[t] = (ACC_W+1)'(mx[t]) - (ACC_W+1)'(rb[rd_bank][t][i]);
    exp_lut #(.DIFF_W(ACC_W + 1), .SHIFT(EXP_SHIFT), .IN_SCALE(EXP_SCALE))
      u_exp (.diff(diff[t]), .e(e[t]));
    recip_lut #(.X_W(32), .ALPHA(255), .BETA(longint'(N) * 255), .NUM(RECIP_NUM))
      u_recip (.x(sm[t]), .r(r[t]));
    assign prod[t] = 16'(e[t]) * 16'(r[t]);
    assign q[t*ACT_W +: ACT_W] = ((prod[t] >> R_SHIFT) > 16'(QMAX)) ? ACT_W'(QMAX)
                                                                  : ACT_W'(prod[t] >> R_SHIFT);
  end

  always_ff @(posedge clk) begin
    if (step) begin
      for (int t = 0; t < TP; t++) begin
        if (pass == 2'd0)
          mx[t] <= (i == '0 || rb[rd_bank][t][i] > mx[t]) ? rb[rd_bank][t][i] : mx[t];
        if (pass == 2'd1)
          sm[t] <= ((i == '0) ? 32'd0 : sm[t]) + 32'(e[t]);
      end
      if (pass == 2'd2) out_data <= q;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full      <= '0;
      wr_bank   <= 1'b0;
      rd_bank   <= 1'b0;
      wr_cnt    <= '0;
      pass      <= 2'd0;
      i         <= '0;
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
        if (pass == 2'd2) out_valid <= 1'b1;
        if (last_i) begin
          i <= '0;
          if (pass == 2'd2) begin
            pass          <= 2'd0;
            full[rd_bank] <= 1'b0;
            rd_bank       <= !rd_bank;
          end else begin
            pass <= pass + 1'b1;
          end
        end else begin
          i <= i + 1'b1;
        end
      end
    end
  end
endmodule
