// tb_dymm: dynamic-weight matrix multiply (the Q x K^T shape, scaled down).
// The weight tile is served combinationally from a testbench array, the way
// the K deep buffer serves it.  The test checks that nothing is computed while
// buf_full is low (the line buffers fill, then in_ready falls), that every
// output tile is correct, that buf_release pulses exactly once after the
// last of TT token groups, and that a second image with new weights works
// under random back-pressure.  The rate check expects CIT*COT cycles per
// token group.
module tb_dymm;
  import hg_pkg::*;
  import tb_ref_pkg::*;
  localparam int TP = 2, TT = 3, CI = 8, CO = 14, CIP = 4, COP = 7, IN_CP = 4;
  localparam int CIT = CI / CIP, COT = CO / COP, T = TP * TT;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, buf_full, buf_release;
  logic [TP*IN_CP*ACT_W-1:0] in_data;
  logic [TP*COP*ACC_W-1:0] out_data;
  logic [$clog2(COT)-1:0] wt_cot;
  logic [$clog2(CIT)-1:0] wt_cit;
  logic [COP*CIP*ACT_W-1:0] wt_data;

  dymm #(.TP(TP), .TT(TT), .CI(CI), .CO(CO), .CIP(CIP), .COP(COP), .IN_CP(IN_CP), .OUT_RQ(1'b0)) dut (.*);

  int wcur [CO*CI];
  always_comb begin
    wt_data = '0;
    for (int co = 0; co < COP; co++)
        for (int ci = 0; ci < CIP; ci++)
          wt_data[(co*CIP + ci)*ACT_W +: ACT_W] = ACT_W'(wcur[(int'(wt_cot)*COP + co)*CI + int'(wt_cit)*CIP + ci]);
  end

  logic [TP*IN_CP*ACT_W-1:0] in_q[$];
  logic [TP*COP*ACC_W-1:0]   exp_q[$];
  int p_in = 100, p_out = 100, n_rel = 0, t_first = -1, t_last = 0, cyc = 0, early = 0;
  logic pending = 1'b0, clear_req = 1'b0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired: exp_q=%0d in_q=%0d full=%b rel=%0d", exp_q.size(), in_q.size(), buf_full, n_rel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    pending = in_valid && !in_ready;
    if (in_valid && in_ready) void'(in_q.pop_front());
    if (buf_release) begin n_rel++; clear_req = 1'b1; end
    if (!buf_full && out_valid && exp_q.size() == TT * COT) early++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data != exp_q[0]) begin failures++; $display("tile mismatch"); end
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
    if (clear_req) begin buf_full = 1'b0; clear_req = 1'b0; end
  end

  task automatic image(input bit check_wait);
    vec_t x, y, w;
    x = rand_vec(T * CI, QMIN, QMAX);
    w = rand_vec(CO * CI, QMIN, QMAX);
    foreach (w[i]) wcur[i] = w[i];
    y = matmul(x, w, T, CI, CO);
    for (int g = 0; g < TT; g++) begin
      for (int cg = 0; cg < CI / IN_CP; cg++) begin
        logic [TP*IN_CP*ACT_W-1:0] tile;
        for (int t = 0; t < TP; t++)
          for (int c = 0; c < IN_CP; c++)
            tile[(t*IN_CP + c)*ACT_W +: ACT_W] = ACT_W'(x[(g*TP + t)*CI + cg*IN_CP + c]);
        in_q.push_back(tile);
      end
      for (int ot = 0; ot < COT; ot++) begin
        logic [TP*COP*ACC_W-1:0] e;
        for (int t = 0; t < TP; t++)
          for (int co = 0; co < COP; co++)
            e[(t*COP + co)*ACC_W +: ACC_W] = ACC_W'(y[(g*TP + t)*CO + ot*COP + co]);
        exp_q.push_back(e);
      end
    end
    if (check_wait) begin
      repeat (40) @(posedge clk);
      checks += 2;
      if (exp_q.size() != TT * COT) begin failures++; $display("computed without the buffer"); end
      if (in_ready) begin failures++; $display("line buffers did not fill"); end
    end
    @(negedge clk) buf_full = 1'b1;
    t_first = -1;
    while (exp_q.size() > 0) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  initial begin
    in_valid = 0; in_data = '0; out_ready = 0; buf_full = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    image(1'b1);
    checks += 3;
    if (n_rel != 1) begin failures++; $display("release pulses: %0d", n_rel); end
    if (buf_full) begin failures++; $display("buffer not released"); end
    if (t_last - t_first != (TT * COT - 1) * CIT) begin
      failures++;
      $display("rate: %0d cycles, expected %0d", t_last - t_first, (TT * COT - 1) * CIT);
    end
    p_in = 50; p_out = 40;
    image(1'b0);
    checks++;
    if (n_rel != 2) begin failures++; $display("release pulses: %0d", n_rel); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
