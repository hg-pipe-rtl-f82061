// tb_mlp_block: one MLP block, scaled down (14 tokens, 24 channels, hidden
// 48) with the paper's per-module parallelism, against the whole-tensor
// reference.  Three images back to back with random output back-pressure.
// Also checked: the residual FIFO never has to hold more than a few token
// groups (the MLP is fine-grained), the GeLU unit is really exercised with
// positive and clipped outputs, and the mean interval between images equals
// the slowest stage (LayerNorm, 3 * C * T/TP cycles) within -5%/+10%.
module tb_mlp_block;
  import hg_pkg::*;
  import tb_ref_pkg::*;
  localparam int T = 14, TP = 2, C = 24, HID = 48, NIMG = 3;
  localparam int TT = T / TP;
  localparam int II_EXP = 3 * C * TT;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, wl_we, wl_unit;
  logic [TP*ACT_W-1:0] in_data, out_data;
  logic [1:0] wl_addr;
  logic [863:0] wl_data;

  mlp_block #(.TP(TP), .C(C), .HID(HID)) dut (.*);

  logic [TP*ACT_W-1:0] in_q[$], exp_q[$];
  int p_out = 85, cyc = 0, n_out = 0, max_res = 0, n_stall = 0;
  int img_done[NIMG];
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
    if (int'(dut.u_res_fifo.count) > max_res) max_res = int'(dut.u_res_fifo.count);
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

  task automatic load(input bit unit, input vec_t w, input int CI, input int CIP, input int COP, input int CO);
    for (int ot = 0; ot < CO / COP; ot++)
      for (int it = 0; it < CI / CIP; it++) begin
        @(negedge clk);
        wl_we = 1; wl_unit = unit; wl_addr = 2'(ot * (CI / CIP) + it);
        wl_data = pack_word(w, CI, CIP, COP, ot, it);
      end
    @(negedge clk) wl_we = 0;
  endtask

  initial begin
    vec_t w1, w2, g;
    int gpos = 0;
    in_valid = 0; in_data = '0; out_ready = 0; wl_we = 0; wl_unit = 0; wl_addr = 0; wl_data = '0;
    w1 = rand_ext(HID * C);
    w2 = rand_ext(C * HID);
    repeat (3) @(posedge clk);
    rst_n = 1;
    load(1'b0, w1, C, 12, 24, HID);
    load(1'b1, w2, HID, 24, 12, C);
    for (int n = 0; n < NIMG; n++) begin
      vec_t x, y;
      x = rand_vec(T * C, QMIN, QMAX);
      g = gelu_ref(matmul(layernorm_ref(x, T, C), w1, T, C, HID));
      foreach (g[i]) if (g[i] > 0) gpos++;
      y = mlp_ref(x, w1, w2, T, C, HID);
      for (int gg = 0; gg < TT; gg++)
        for (int c = 0; c < C; c++) begin
          logic [TP*ACT_W-1:0] a, e;
          for (int t = 0; t < TP; t++) begin
            a[t*ACT_W +: ACT_W] = ACT_W'(x[(gg*TP + t)*C + c]);
            e[t*ACT_W +: ACT_W] = ACT_W'(y[(gg*TP + t)*C + c]);
          end
          in_q.push_back(a);
          exp_q.push_back(e);
        end
    end
    while (exp_q.size() > 0) @(posedge clk);
    checks += 4;
    if (gpos == 0) begin failures++; $display("GeLU output never positive"); end
    if (max_res > 8 * C || max_res == 0) begin failures++; $display("residual FIFO peak %0d", max_res); end
    if (n_stall == 0) begin failures++; $display("no back-pressure seen"); end
    if ((img_done[2] - img_done[0]) / 2 < II_EXP - II_EXP / 20 || (img_done[2] - img_done[0]) / 2 > II_EXP + II_EXP / 10) begin
      failures++;
      $display("image interval %0d, expected %0d", (img_done[2] - img_done[0]) / 2, II_EXP);
    end
    $display("mlp: residual FIFO peak=%0d stalls=%0d interval=%0d (stage max %0d)",
             max_res, n_stall, (img_done[2] - img_done[0]) / 2, II_EXP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
