// tb_layernorm: three-pass LayerNorm against the tensor reference
// (C = 24 channels, 4 token groups of 2 tokens).  Phase 1 checks the rate,
// (groups-1)*3C + C-1 cycles from first to last output; phase 2 adds random
// gaps and back-pressure.  One token has all channels equal (zero variance),
// one is a wide ramp, the rest are random.
module tb_layernorm;
  import hg_pkg::*;
  import tb_ref_pkg::*;
  localparam int TP = 2, C = 24, TG = 4, T = TP * TG;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [TP*ACT_W-1:0] in_data, out_data;

  layernorm #(.TP(TP), .C(C)) dut (.*);

  logic [TP*ACT_W-1:0] in_q[$], exp_q[$];
  int p_in = 100, p_out = 100, t_first = -1, t_last = 0, cyc = 0, distinct = 0;
  logic pending = 1'b0;
  logic [TP*ACT_W-1:0] prev = '0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    pending = in_valid && !in_ready;
    if (in_valid && in_ready) void'(in_q.pop_front());
    if (out_valid && out_ready) begin
      checks++;
      if (out_data != exp_q[0]) begin failures++; $display("mismatch got %h exp %h", out_data, exp_q[0]); end
      if (out_data != prev) distinct++;
      prev = out_data;
      void'(exp_q.pop_front());
      if (t_first < 0) t_first = cyc;
      t_last = cyc;
    end
  end

  always @(negedge clk) begin
    if (!pending) begin
      in_valid = (in_q.size() > 0) && ($urandom_range(99) < p_in);
      in_data  = (in_q.size() > 0) ? in_q[0] : '0;
    end
    out_ready = ($urandom_range(99) < p_out);
  end

  task automatic run();
    vec_t x, y;
    x = rand_vec(T * C, QMIN, QMAX);
    for (int c = 0; c < C; c++) x[2*C + c] = 2;                   // zero variance
    for (int c = 0; c < C; c++) x[5*C + c] = QMIN + (c % 8);      // ramp
    y = layernorm_ref(x, T, C);
    for (int g = 0; g < TG; g++)
      for (int c = 0; c < C; c++) begin
        logic [TP*ACT_W-1:0] a, e;
        for (int t = 0; t < TP; t++) begin
          a[t*ACT_W +: ACT_W] = ACT_W'(x[(g*TP + t)*C + c]);
          e[t*ACT_W +: ACT_W] = ACT_W'(y[(g*TP + t)*C + c]);
        end
        in_q.push_back(a);
        exp_q.push_back(e);
      end
    t_first = -1;
    while (exp_q.size() > 0) @(posedge clk);
  endtask

  initial begin
    in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run();
    checks++;
    if (t_last - t_first != (TG - 1) * 3 * C + C - 1) begin
      failures++;
      $display("rate: %0d cycles, expected %0d", t_last - t_first, (TG - 1) * 3 * C + C - 1);
    end
    p_in = 50; p_out = 40;
    run();
    checks++;
    if (distinct < 10) begin failures++; $display("output hardly varies"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
