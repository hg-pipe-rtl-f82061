// tb_residual_add: residual add and ReQuant.  Accumulator tiles (2 x 6) and
// residual beats (2 x 1) arrive on separate streams with independent random
// gaps; each output beat must equal requant((res << 5) + acc).  Phase 1
// checks one output per cycle when both inputs are always available.
module tb_residual_add;
  import hg_pkg::*;
  import tb_ref_pkg::*;
  localparam int TP = 2, IN_CP = 6, NT = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, res_valid, res_ready, out_valid, out_ready;
  logic [TP*IN_CP*ACC_W-1:0] in_data;
  logic [TP*ACT_W-1:0] res_data, out_data;

  residual_add #(.TP(TP), .IN_CP(IN_CP)) dut (.*);

  logic [TP*IN_CP*ACC_W-1:0] in_q[$];
  logic [TP*ACT_W-1:0]       res_q[$], exp_q[$];
  int p_in = 100, p_res = 100, p_out = 100, t_first = -1, t_last = 0, cyc = 0;
  logic pend_in = 1'b0, pend_res = 1'b0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    pend_in  = in_valid && !in_ready;
    pend_res = res_valid && !res_ready;
    if (in_valid && in_ready) void'(in_q.pop_front());
    if (res_valid && res_ready) void'(res_q.pop_front());
    if (out_valid && out_ready) begin
      checks++;
      if (out_data != exp_q[0]) begin failures++; $display("mismatch got %h exp %h", out_data, exp_q[0]); end
      void'(exp_q.pop_front());
      if (t_first < 0) t_first = cyc;
      t_last = cyc;
    end
  end

  always @(negedge clk) begin
    if (!pend_in) begin
      in_valid = (in_q.size() > 0) && ($urandom_range(99) < p_in);
      in_data  = (in_q.size() > 0) ? in_q[0] : '0;
    end
    if (!pend_res) begin
      res_valid = (res_q.size() > 0) && ($urandom_range(99) < p_res);
      res_data  = (res_q.size() > 0) ? res_q[0] : '0;
    end
    out_ready = ($urandom_range(99) < p_out);
  end

  task automatic run();
    vec_t a, r, y;
    a = rand_vec(NT * TP * IN_CP, -600, 600);
    r = rand_vec(NT * TP * IN_CP, QMIN, QMAX);
    // both vectors indexed as (token group, t, channel) -> flat (n, c, t) order below
    y = resadd_ref(r, a);
    for (int n = 0; n < NT; n++) begin
      logic [TP*IN_CP*ACC_W-1:0] tile;
      for (int t = 0; t < TP; t++)
        for (int c = 0; c < IN_CP; c++)
          tile[(t*IN_CP + c)*ACC_W +: ACC_W] = ACC_W'(a[(n*TP + t)*IN_CP + c]);
      in_q.push_back(tile);
      for (int c = 0; c < IN_CP; c++) begin
        logic [TP*ACT_W-1:0] rr, e;
        for (int t = 0; t < TP; t++) begin
          rr[t*ACT_W +: ACT_W] = ACT_W'(r[(n*TP + t)*IN_CP + c]);
          e[t*ACT_W +: ACT_W]  = ACT_W'(y[(n*TP + t)*IN_CP + c]);
        end
        res_q.push_back(rr);
        exp_q.push_back(e);
      end
    end
    t_first = -1;
    while (exp_q.size() > 0) @(posedge clk);
  endtask

  initial begin
    in_valid = 0; in_data = '0; res_valid = 0; res_data = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run();
    checks++;
    if (t_last - t_first != NT * IN_CP - 1) begin
      failures++;
      $display("rate: %0d cycles, expected %0d", t_last - t_first, NT * IN_CP - 1);
    end
    p_in = 60; p_res = 50; p_out = 50;
    run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
