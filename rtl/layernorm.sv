// layernorm: three-pass LayerNorm over C channels for TP tokens at once.
//
// Input and output are TP x 1 three-bit activations per beat, token groups in
// order, channels ascending.  A row group is held in a double-buffered row
// buffer and read three times (II = TT * C * 3 = 56448 cycles at the paper's
// sizes):
//   pass 0  S = sum_c x_c
//   pass 1  d_c = C*x_c - S   (C times the deviation, so no divider)
//           V = sum_c d_c^2   (= C^3 * variance)
//   pass 2  y_c = d_c * rsqrt_lut(V),  out = requant_lut(y_c)
// With the Rsqrt numerator sqrt(C) * 2^F, y_c is the normalised value in
// fixed point with F fraction bits, and the ReQuant table turns it into a
// 3-bit activation.  The fused Rsqrt of Eq. 2 and the three passes follow the
// paper; the scaling by C, the fixed-point format and the table ranges are
// this design's.  gamma/beta are assumed folded into the next layer.
module layernorm
  import hg_pkg::*;
#(
  parameter int  TP      = 2,
  parameter int  C       = 192,
  parameter real OUT_GAIN = 1.0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [TP*ACT_W-1:0] in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [TP*ACT_W-1:0] out_data
);
  localparam int     I_W      = (C > 1) ? $clog2(C) : 1;
  localparam int     F        = $clog2(2048 * C);                 // fraction bits of y
  localparam longint VMAX     = (longint'(C) * C * C * 49) / 4;   // C^3 * max variance
  localparam int     RS_SHIFT = pot_shift(VMAX);
  localparam real    RS_NUM   = $sqrt(real'(C)) * real'(longint'(1) << F);
  localparam longint RQ_ALPHA = -(longint'(4) << F);
  localparam int     RQ_SHIFT = F - 3;
  localparam real    RQ_SCALE = OUT_GAIN / real'(longint'(1) << F);

  act_t           rb [2][TP][C];
  logic [1:0]     full;
  logic           wr_bank, rd_bank;
  logic [I_W-1:0] wr_cnt;
  logic           push;

  assign in_ready = !full[wr_bank];
  assign push     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (push)
      for (int t = 0; t < TP; t++)
        rb[wr_bank][t][wr_cnt] <= act_t'(in_data[t*ACT_W +: ACT_W]);
  end

  logic [1:0]         pass;
  logic [I_W-1:0]     i;
  logic signed [19:0] s [TP];
  logic signed [19:0] d [TP];
  logic [39:0]        v [TP];
  logic [11:0]        r [TP];
  logic signed [33:0] y [TP];
  logic               out_free, step, last_i;
  logic [TP*ACT_W-1:0] q;

  assign out_free = !out_valid || out_ready;
  assign step     = full[rd_bank] && ((pass != 2'd2) || out_free);
  assign last_i   = (i == I_W'(C - 1));

  for (genvar t = 0; t < TP; t++) begin : g_lane
    assign d[t] = 20'(C) * 20'(rb[rd_bank][t][i]) - s[t];
    rsqrt_lut #(.X_W(40), .ALPHA(0), .SHIFT(RS_SHIFT), .NUM(RS_NUM))
      u_rsqrt (.x(v[t]), .r(r[t]));
    assign y[t] = 34'(d[t]) * $signed({22'd0, r[t]});
    requant_lut #(.IN_W(34), .ALPHA(RQ_ALPHA), .SHIFT(RQ_SHIFT), .SCALE(RQ_SCALE))
      u_rq (.x(y[t]), .y(q[t*ACT_W +: ACT_W]));
  end

  always_ff @(posedge clk) begin
    if (step) begin
      for (int t = 0; t < TP; t++) begin
        if (pass == 2'd0) s[t] <= ((i == '0) ? 20'sd0 : s[t]) + 20'(rb[rd_bank][t][i]);
        if (pass == 2'd1) v[t] <= ((i == '0) ? 40'd0 : v[t]) + 40'(40'(d[t]) * 40'(d[t]));
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
        if (wr_cnt == I_W'(C - 1)) begin
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
