// tb_hg_pipe: end-to-end test of the encoder pipeline, scaled down to two
// layers of 14 tokens, 24 channels, 2 heads of 12 and MLP width 48, with the
// paper's per-module parallelism.  Four images are streamed back to back
// with random input gaps and random output back-pressure, and every output
// beat is compared with a chain of the whole-tensor reference models.
//
// Each pipeline mechanism is counted and the test fails if one never
// happened:
//   in_stall   the pipeline pushed back on its input
//   out_stall  the consumer pushed back on the output
//   wait_k     an attention QK unit held full line buffers waiting for K
//   k_queued   a later image's K tiles waited in the K deep FIFO
//   release    K/V deep buffers released (must be once per head per image)
//   overlap    a new image entered before the previous one left
//   layer_ovl  layer 1 produced output while layer 0 still took input
//   interval   mean image interval within -5%/+10% of the slowest stage
module tb_hg_pipe;
  import hg_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 2, T = 14, TP = 2, C = 24, H = 2, DH = 12, HID = 48, NIMG = 4;
  localparam int TT = T / TP;
  localparam int BEATS = TT * C;
  localparam int II_EXP = 3 * C * TT;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, wl_we, wl_layer, wl_mlp;
  logic [TP*ACT_W-1:0] in_data, out_data;
  logic [2:0] wl_unit;
  logic [3:0] wl_addr;
  logic [863:0] wl_data;

  hg_pipe #(.LAYERS(L), .T(T), .TP(TP), .C(C), .H(H), .DH(DH), .HID(HID)) dut (.*);

  logic [TP*ACT_W-1:0] in_q[$], exp_q[$];
  int p_in = 100, p_out = 100, cyc = 0, n_in = 0, n_out = 0;
  int img_done[NIMG];
  int n_in_stall = 0, n_out_stall = 0, n_wait_k = 0, n_k_queued = 0;
  int n_release = 0, n_overlap = 0, n_layer_ovl = 0;
  logic pending = 1'b0;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d outputs", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    pending = in_valid && !in_ready;
    if (in_valid && !in_ready) n_in_stall++;
    if (in_valid && in_ready) begin void'(in_q.pop_front()); n_in++; end
    if (n_in > n_out / BEATS * BEATS + BEATS) n_overlap++;
    if (dut.g_layer[0].u_mha.g_head[0].u_qk.full[dut.g_layer[0].u_mha.g_head[0].u_qk.rd_bank]
        && !dut.g_layer[0].u_mha.g_head[0].k_full) n_wait_k++;
    if (dut.g_layer[1].u_mha.g_head[1].u_qk.full[dut.g_layer[1].u_mha.g_head[1].u_qk.rd_bank]
        && !dut.g_layer[1].u_mha.g_head[1].k_full) n_wait_k++;
    if (dut.g_layer[0].u_mha.g_head[0].k_full && dut.g_layer[0].u_mha.g_head[0].f_valid[1]) n_k_queued++;
    if (dut.g_layer[1].u_mha.g_head[0].k_full && dut.g_layer[1].u_mha.g_head[0].f_valid[1]) n_k_queued++;
    if (dut.g_layer[0].u_mha.g_head[0].k_release) n_release++;
    if (dut.g_layer[0].u_mha.g_head[0].v_release) n_release++;
    if (dut.g_layer[0].u_mha.g_head[1].k_release) n_release++;
    if (dut.g_layer[0].u_mha.g_head[1].v_release) n_release++;
    if (dut.g_layer[1].u_mha.g_head[0].k_release) n_release++;
    if (dut.g_layer[1].u_mha.g_head[0].v_release) n_release++;
    if (dut.g_layer[1].u_mha.g_head[1].k_release) n_release++;
    if (dut.g_layer[1].u_mha.g_head[1].v_release) n_release++;
    if (dut.lv[2*L-1] && dut.lr[2*L-1] && dut.lv[0] && dut.lr[0]) n_layer_ovl++;
    if (out_valid && !out_ready) n_out_stall++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data != exp_q[0]) begin
        failures++;
        if (failures < 10) $display("beat %0d mismatch got %h exp %h", n_out, out_data, exp_q[0]);
      end
      void'(exp_q.pop_front());
      n_out++;
      if (n_out % BEATS == 0) img_done[n_out / BEATS - 1] = cyc;
    end
  end

  always @(negedge clk) begin
    if (!pending) begin
      in_valid = (in_q.size() > 0) && ($urandom_range(99) < p_in);
      in_data  = (in_q.size() > 0) ? in_q[0] : '0;
    end
    out_ready = ($urandom_range(99) < p_out);
  end

  task automatic load(input int layer, input bit mlp, input int unit, input vec_t w,
                      input int CI, input int CIP, input int COP, input int CO);
    for (int ot = 0; ot < CO / COP; ot++)
      for (int it = 0; it < CI / CIP; it++) begin
        @(negedge clk);
        wl_we = 1; wl_layer = 1'(layer); wl_mlp = mlp; wl_unit = 3'(unit);
        wl_addr = 4'(ot * (CI / CIP) + it);
        wl_data = pack_word(w, CI, CIP, COP, ot, it);
      end
    @(negedge clk) wl_we = 0;
  endtask

  initial begin
    vec_t wq[L][], wk[L][], wv[L][], wp[L], w1[L], w2[L];
    int ival;
    in_valid = 0; in_data = '0; out_ready = 0; wl_we = 0; wl_layer = 0; wl_mlp = 0;
    wl_unit = 0; wl_addr = 0; wl_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < L; l++) begin
      wq[l] = new[H]; wk[l] = new[H]; wv[l] = new[H];
      for (int h = 0; h < H; h++) begin
        wq[l][h] = rand_vec(DH * C, QMIN, QMAX);
        wk[l][h] = rand_vec(DH * C, QMIN, QMAX);
        wv[l][h] = rand_vec(DH * C, QMIN, QMAX);
        load(l, 1'b0, 3*h + 0, wq[l][h], C, 6, 4, DH);
        load(l, 1'b0, 3*h + 1, wk[l][h], C, 6, 4, DH);
        load(l, 1'b0, 3*h + 2, wv[l][h], C, 6, 4, DH);
      end
      wp[l] = rand_vec(C * C, QMIN, QMAX);
      w1[l] = rand_ext(HID * C);
      w2[l] = rand_ext(C * HID);
      load(l, 1'b0, 3*H, wp[l], C, 12, 6, C);
      load(l, 1'b1, 0, w1[l], C, 12, 24, HID);
      load(l, 1'b1, 1, w2[l], HID, 24, 12, C);
    end
    p_in = 90; p_out = 90;
    for (int n = 0; n < NIMG; n++) begin
      vec_t x, y;
      x = rand_vec(T * C, QMIN, QMAX);
      for (int c = 0; c < C; c++) x[5*C + c] = (c % 2) ? QMAX : QMIN;
      y = x;
      for (int l = 0; l < L; l++)
        y = mlp_ref(mha_ref(y, wq[l], wk[l], wv[l], wp[l], T, C, H, DH), w1[l], w2[l], T, C, HID);
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
    ival = (img_done[NIMG-1] - img_done[1]) / (NIMG - 2);
    checks += 8;
    if (n_in_stall == 0)  begin failures++; $display("input never stalled"); end
    if (n_out_stall == 0) begin failures++; $display("output never stalled"); end
    if (n_wait_k == 0)    begin failures++; $display("QK never waited for K"); end
    if (n_k_queued == 0)  begin failures++; $display("next image's K never queued"); end
    if (n_release != 2 * H * L * NIMG) begin
      failures++; $display("buffer releases %0d, expected %0d", n_release, 2 * H * L * NIMG);
    end
    if (n_overlap == 0)   begin failures++; $display("images never overlapped"); end
    if (n_layer_ovl == 0) begin failures++; $display("layers never overlapped"); end
    // with 90% input and output duty the throughput bound rises by ~1/0.9
    if (ival < II_EXP - II_EXP / 20 || ival > II_EXP * 10 / 9 + II_EXP / 10) begin
      failures++; $display("image interval %0d, expected about %0d", ival, II_EXP);
    end
    $display("hg_pipe: in_stall=%0d out_stall=%0d wait_k=%0d k_queued=%0d releases=%0d overlap=%0d layer_ovl=%0d interval=%0d (stage max %0d)",
             n_in_stall, n_out_stall, n_wait_k, n_k_queued, n_release, n_overlap, n_layer_ovl, ival, II_EXP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
