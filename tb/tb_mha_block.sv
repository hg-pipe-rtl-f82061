// tb_mha_block: one attention block, scaled down (14 tokens, 24 channels,
// 2 heads of 12) with the paper's per-module parallelism, against the
// whole-tensor reference.  Three images are streamed back to back with
// random output back-pressure.  Besides comparing every output beat the test
// checks the hybrid-grained behaviour: the Q x K^T unit must wait with full
// line buffers until the whole K tensor is buffered; the next image's K must
// wait in its deep FIFO while the buffer is busy; each image must release the
// K and V buffers once per head; and the mean interval between the
// last images must be within -5%/+10% of the slowest stage (LayerNorm here: 3 * C * T/TP cycles).
module tb_mha_block;
  import hg_pkg::*;
  import tb_ref_pkg::*;
  localparam int T = 14, TP = 2, C = 24, H = 2, DH = 12, NIMG = 3;
  localparam int TT = T / TP;
  localparam int II_EXP = 3 * C * TT;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, wl_we;
  logic [TP*ACT_W-1:0] in_data, out_data;
  logic [2:0] wl_unit;
  logic [3:0] wl_addr;
  logic [215:0] wl_data;

  mha_block #(.T(T), .TP(TP), .C(C), .H(H), .DH(DH)) dut (.*);

  logic [TP*ACT_W-1:0] in_q[$], exp_q[$];
  int p_out = 100, cyc = 0, n_out = 0;
  int img_done[NIMG];
  int n_wait_k = 0, n_k_queued = 0, n_release = 0, n_stall = 0;
  logic pending = 1'b0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d outputs", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    pending = in_valid && !in_ready;
    if (in_valid && in_ready) void'(in_q.pop_front());
    if (dut.g_head[0].u_qk.full[dut.g_head[0].u_qk.rd_bank] && !dut.g_head[0].k_full) n_wait_k++;
    if (dut.g_head[0].k_full && dut.g_head[0].f_valid[1]) n_k_queued++;
    if (dut.g_head[0].k_release) n_release++;
    if (dut.g_head[1].k_release) n_release++;
    if (dut.g_head[0].v_release) n_release++;
    if (out_valid && !out_ready) n_stall++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data != exp_q[0]) begin failures++; $display("beat %0d mismatch got %h exp %h", n_out, out_data, exp_q[0]); end
      void'(exp_q.pop_front());
      n_out++;
      if (n_out % (TT * C) == 0) img_done[n_out / (TT * C) - 1] = cyc;
    end
  end

  always @(negedge clk) begin
    if (!pending) begin
      in_valid = (in_q.size() > 0);
      in_data  = (in_q.size() > 0) ? in_q[0] : '0;
    end
    out_ready = ($urandom_range(99) < p_out);
  end

  task automatic load(input int unit, input vec_t w, input int CI, input int CIP, input int COP, input int CO);
    for (int ot = 0; ot < CO / COP; ot++)
      for (int it = 0; it < CI / CIP; it++) begin
        @(negedge clk);
        wl_we = 1; wl_unit = 3'(unit); wl_addr = 4'(ot * (CI / CIP) + it);
        wl_data = 216'(pack_word(w, CI, CIP, COP, ot, it));
      end
    @(negedge clk) wl_we = 0;
  endtask

  initial begin
    vec_t wq[], wk[], wv[], wp;
    in_valid = 0; in_data = '0; out_ready = 0; wl_we = 0; wl_unit = 0; wl_addr = 0; wl_data = '0;
    wq = new[H]; wk = new[H]; wv = new[H];
    for (int h = 0; h < H; h++) begin
      wq[h] = rand_vec(DH * C, QMIN, QMAX);
      wk[h] = rand_vec(DH * C, QMIN, QMAX);
      wv[h] = rand_vec(DH * C, QMIN, QMAX);
    end
    wp = rand_vec(C * C, QMIN, QMAX);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int h = 0; h < H; h++) begin
      load(3*h + 0, wq[h], C, 6, 4, DH);
      load(3*h + 1, wk[h], C, 6, 4, DH);
      load(3*h + 2, wv[h], C, 6, 4, DH);
    end
    load(3*H, wp, C, 12, 6, C);
    for (int n = 0; n < NIMG; n++) begin
      vec_t x, y;
      x = rand_vec(T * C, QMIN, QMAX);
      // a few tokens that strongly match, so attention is not uniform
      for (int c = 0; c < C; c++) x[3*C + c] = (c % 2) ? QMAX : QMIN;
      y = mha_ref(x, wq, wk, wv, wp, T, C, H, DH);
      for (int g = 0; g < TT; g++)
        for (int c = 0; c < C; c++) begin
          logic [TP*ACT_W-1:0] a, e;
          for (int t = 0; t < TP; t++) begin
            a[t*ACT_W +: ACT_W] = ACT_W'(x[(g*TP + t)*C + c]);
            e[t*ACT_W +: ACT_W] = ACT_W'(y[(g*TP + t)*C + c]);
          end
          in_q.push_back(a);
          exp_q.push_back(e);
        end
    end
    while (exp_q.size() > 0) @(posedge clk);
    checks += 5;
    if (n_wait_k == 0)   begin failures++; $display("QK never waited for the K tensor"); end
    if (n_k_queued == 0) begin failures++; $display("next image's K never queued in its FIFO"); end
    if (n_release != 3 * NIMG) begin failures++; $display("buffer releases %0d, expected %0d", n_release, 3 * NIMG); end
    if (n_stall == 0)    begin failures++; $display("no output back-pressure seen"); end
    if ((img_done[2] - img_done[0]) / 2 < II_EXP - II_EXP / 20 || (img_done[2] - img_done[0]) / 2 > II_EXP + II_EXP / 10) begin
      failures++;
      $display("image interval %0d, expected %0d", (img_done[2] - img_done[0]) / 2, II_EXP);
    end
    $display("mha: wait_k=%0d k_queued=%0d releases=%0d stalls=%0d interval=%0d (stage max %0d)",
             n_wait_k, n_k_queued, n_release, n_stall, (img_done[2] - img_done[0]) / 2, II_EXP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial p_out = 85;
endmodule
