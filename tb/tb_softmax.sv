// tb_softmax: row softmax against the tensor reference (N = 14 scores per
// row, 3 token groups of 2 rows).  Phase 1 runs without stalls and checks the
// three-pass rate: the last output of the run comes (groups-1)*3N + N-1
// cycles after the first.  Phase 2 adds random gaps and back-pressure.
// Scores include a large negative spread so that exponents underflow to zero
// and the reciprocal table sees both of its segments.
module tb_softmax;
  import hg_pkg::*;
  import tb_ref_pkg::*;
  localparam int TP = 2, N = 14, IN_CP = 7, TG = 3, T = TP * TG;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [TP*IN_CP*ACC_W-1:0] in_data;
  logic [TP*ACT_W-1:0] out_data;

  softmax #(.TP(TP), .N(N), .IN_CP(IN_CP)) dut (.*);

  logic [TP*IN_CP*ACC_W-1:0] in_q[$];
  logic [TP*ACT_W-1:0]       exp_q[$];
  int p_in = 100, p_out = 100, t_first = -1, t_last = 0, cyc = 0, nonzero = 0;
  logic pending = 1'b0;

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
      if (out_data != '0) nonzero++;
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
    x = rand_vec(T * N, -60, 60);
    for (int t = 0; t < T; t++) x[t*N + t] = 90 + 10 * t;          // one clear winner
    for (int j = 0; j < N; j += 3) x[1*N + j] = -400;             // deep underflow in row 1
    y = softmax_ref(x, T, N);
    for (int g = 0; g < TG; g++) begin
      for (int cg = 0; cg < N / IN_CP; cg++) begin
        logic [TP*IN_CP*ACC_W-1:0] tile;
        for (int t = 0; t < TP; t++)
          for (int c = 0; c < IN_CP; c++)
            tile[(t*IN_CP + c)*ACC_W +: ACC_W] = ACC_W'(x[(g*TP + t)*N + cg*IN_CP + c]);
        in_q.push_back(tile);
      end
      for (int j = 0; j < N; j++) begin
        logic [TP*ACT_W-1:0] e;
        for (int t = 0; t < TP; t++) e[t*ACT_W +: ACT_W] = ACT_W'(y[(g*TP + t)*N + j]);
        exp_q.push_back(e);
      end
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
    if (t_last - t_first != (TG - 1) * 3 * N + N - 1) begin
      failures++;
      $display("rate: %0d cycles, expected %0d", t_last - t_first, (TG - 1) * 3 * N + N - 1);
    end
    p_in = 50; p_out = 40;
    run();
    checks++;
    if (nonzero == 0) begin failures++; $display("all probabilities quantised to zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
