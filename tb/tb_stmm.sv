// tb_stmm: static-weight matrix multiply against the tensor reference.
// Two copies (raw accumulator output and ReQuant output) share one input
// stream.  Phase 1 streams 5 token groups with no stalls and checks the
// rate: one output tile every CIT cycles, i.e. CIT*COT cycles per token group
// (the paper's II formula).  Phase 2 streams new data with random input gaps
// and random output back-pressure.  Every output tile is compared.
module tb_stmm;
  import hg_pkg::*;
  import tb_ref_pkg::*;
  localparam int TP = 2, CI = 12, CO = 8, CIP = 3, COP = 4, IN_CP = 2;
  localparam int CIT = CI / CIP, COT = CO / COP, TG = 5, T = TP * TG;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, in_ready0, in_ready1;
  logic [TP*IN_CP*ACT_W-1:0] in_data;
  logic out_valid0, out_valid1, out_ready;
  logic [TP*COP*ACC_W-1:0] out_data0;
  logic [TP*COP*ACT_W-1:0] out_data1;
  logic wl_we;
  logic [$clog2(CIT*COT)-1:0] wl_addr;
  logic [COP*CIP*W_W-1:0] wl_data;

  stmm #(.TP(TP), .CI(CI), .CO(CO), .CIP(CIP), .COP(COP), .IN_CP(IN_CP), .OUT_RQ(1'b0)) dut_raw (
    .clk, .rst_n, .in_valid(in_valid && in_ready), .in_ready(in_ready0), .in_data,
    .out_valid(out_valid0), .out_ready, .out_data(out_data0), .wl_we, .wl_addr, .wl_data);
  stmm #(.TP(TP), .CI(CI), .CO(CO), .CIP(CIP), .COP(COP), .IN_CP(IN_CP), .OUT_RQ(1'b1)) dut_rq (
    .clk, .rst_n, .in_valid(in_valid && in_ready), .in_ready(in_ready1), .in_data,
    .out_valid(out_valid1), .out_ready, .out_data(out_data1), .wl_we, .wl_addr, .wl_data);
  assign in_ready = in_ready0 && in_ready1;

  logic [TP*IN_CP*ACT_W-1:0] in_q[$];
  logic [TP*COP*ACC_W-1:0]   exp0_q[$];
  logic [TP*COP*ACT_W-1:0]   exp1_q[$];
  int p_in = 100, p_out = 100, n_out = 0, t_first = -1, t_last = 0, cyc = 0;
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
    checks++;
    if (out_valid0 != out_valid1) begin failures++; $display("valid mismatch"); end
    if (out_valid0 && out_ready) begin
      checks += 2;
      if (out_data0 != exp0_q[0]) begin failures++; $display("raw tile %0d mismatch", n_out); end
      if (out_data1 != exp1_q[0]) begin failures++; $display("rq tile %0d mismatch", n_out); end
      void'(exp0_q.pop_front());
      void'(exp1_q.pop_front());
      if (t_first < 0) t_first = cyc;
      t_last = cyc;
      n_out++;
    end
  end

  always @(negedge clk) begin
    if (!pending) begin
      in_valid = (in_q.size() > 0) && ($urandom_range(99) < p_in);
      in_data  = (in_q.size() > 0) ? in_q[0] : '0;
    end
    out_ready = ($urandom_range(99) < p_out);
  end

  task automatic run(input vec_t w);
    vec_t x, y, yq;
    x = rand_vec(T * CI, QMIN, QMAX);
    y = matmul(x, w, T, CI, CO);
    yq = requant_all(y, -128, 2, 0.03125);
    for (int g = 0; g < TG; g++) begin
      for (int cg = 0; cg < CI / IN_CP; cg++) begin
        logic [TP*IN_CP*ACT_W-1:0] tile;
        for (int t = 0; t < TP; t++)
          for (int c = 0; c < IN_CP; c++)
            tile[(t*IN_CP + c)*ACT_W +: ACT_W] = ACT_W'(x[(g*TP + t)*CI + cg*IN_CP + c]);
        in_q.push_back(tile);
      end
      for (int ot = 0; ot < COT; ot++) begin
        logic [TP*COP*ACC_W-1:0] e0;
        logic [TP*COP*ACT_W-1:0] e1;
        for (int t = 0; t < TP; t++)
          for (int co = 0; co < COP; co++) begin
            e0[(t*COP + co)*ACC_W +: ACC_W] = ACC_W'(y[(g*TP + t)*CO + ot*COP + co]);
            e1[(t*COP + co)*ACT_W +: ACT_W] = ACT_W'(yq[(g*TP + t)*CO + ot*COP + co]);
          end
        exp0_q.push_back(e0);
        exp1_q.push_back(e1);
      end
    end
    while (exp0_q.size() > 0) @(posedge clk);
  endtask

  initial begin
    vec_t w;
    in_valid = 0; in_data = '0; out_ready = 0; wl_we = 0; wl_addr = '0; wl_data = '0;
    w = rand_vec(CO * CI, QMIN, QMAX);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ot = 0; ot < COT; ot++)
      for (int it = 0; it < CIT; it++) begin
        @(negedge clk);
        wl_we = 1; wl_addr = $bits(wl_addr)'(ot * CIT + it);
        wl_data = $bits(wl_data)'(pack_word(w, CI, CIP, COP, ot, it));
      end
    @(negedge clk) wl_we = 0;
    // phase 1: no stalls, check the rate
    run(w);
    checks++;
    if (t_last - t_first != (TG * COT - 1) * CIT) begin
      failures++;
      $display("rate: %0d cycles for %0d tiles, expected %0d", t_last - t_first, TG * COT, (TG * COT - 1) * CIT);
    end
    // phase 2: random gaps and back-pressure
    p_in = 60; p_out = 50;
    run(w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
