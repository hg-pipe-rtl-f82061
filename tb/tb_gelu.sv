// tb_gelu: fused GeLU-ReQuant unit.  Tiles of 2 x 6 accumulators (spanning
// and exceeding the table range) are split into 3 beats of 2 x 2; each value
// is compared with the fused table evaluated on the reference side.  Phase 1
// checks the rate: with input always available, one beat per cycle with no
// gap between tiles.  Phase 2 adds random gaps and back-pressure.
module tb_gelu;
  import hg_pkg::*;
  import tb_ref_pkg::*;
  localparam int TP = 2, CP = 2, IN_CP = 6, NT = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [TP*IN_CP*ACC_W-1:0] in_data;
  logic [TP*CP*ACT_W-1:0] out_data;

  gelu #(.TP(TP), .CP(CP), .IN_CP(IN_CP)) dut (.*);

  logic [TP*IN_CP*ACC_W-1:0] in_q[$];
  logic [TP*CP*ACT_W-1:0]    exp_q[$];
  int p_in = 100, p_out = 100, t_first = -1, t_last = 0, cyc = 0;
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
    x = rand_vec(NT * TP * IN_CP, -320, 320);
    y = gelu_ref(x);
    for (int n = 0; n < NT; n++) begin
      logic [TP*IN_CP*ACC_W-1:0] tile;
      for (int t = 0; t < TP; t++)
        for (int c = 0; c < IN_CP; c++)
          tile[(t*IN_CP + c)*ACC_W +: ACC_W] = ACC_W'(x[(n*TP + t)*IN_CP + c]);
      in_q.push_back(tile);
      for (int k = 0; k < IN_CP / CP; k++) begin
        logic [TP*CP*ACT_W-1:0] e;
        for (int t = 0; t < TP; t++)
          for (int c = 0; c < CP; c++)
            e[(t*CP + c)*ACT_W +: ACT_W] = ACT_W'(y[(n*TP + t)*IN_CP + k*CP + c]);
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
    if (t_last - t_first != NT * (IN_CP / CP) - 1) begin
      failures++;
      $display("rate: %0d cycles, expected %0d", t_last - t_first, NT * (IN_CP / CP) - 1);
    end
    p_in = 50; p_out = 40;
    run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
