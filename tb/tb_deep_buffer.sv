// tb_deep_buffer: K-style (plain) and V-style (transposed) deep buffers.
// Both receive the same token-major tile stream with random gaps.  The test
// checks that full rises only after the last tile and then blocks further
// input, that every read tile matches the tensor (or its transpose), and that
// a release frees the buffer for a second tensor.
module tb_deep_buffer;
  import hg_pkg::*;
  import tb_ref_pkg::*;
  localparam int T = 14, C = 8, WTP = 2, WCP = 4;
  localparam int KR = 7, KC = 4;     // K: rows = tokens
  localparam int VR = 4, VC = 7;     // V: rows = channels (transposed)
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, k_ready, v_ready, k_full, v_full, rel;
  logic [WTP*WCP*ACT_W-1:0] in_data;
  logic [0:0] k_row;
  logic [0:0] k_col;
  logic [0:0] v_row;
  logic [0:0] v_col;
  logic [KR*KC*ACT_W-1:0] k_tile;
  logic [VR*VC*ACT_W-1:0] v_tile;

  deep_buffer #(.T(T), .C(C), .WTP(WTP), .WCP(WCP), .ROWS(KR), .COLS(KC), .TRANSPOSE(1'b0)) dut_k (
    .clk, .rst_n, .in_valid(in_valid && in_ready), .in_ready(k_ready), .in_data, .full(k_full),
    .release_buf(rel), .rd_row(k_row), .rd_col(k_col), .rd_data(k_tile));
  deep_buffer #(.T(T), .C(C), .WTP(WTP), .WCP(WCP), .ROWS(VR), .COLS(VC), .TRANSPOSE(1'b1)) dut_v (
    .clk, .rst_n, .in_valid(in_valid && in_ready), .in_ready(v_ready), .in_data, .full(v_full),
    .release_buf(rel), .rd_row(v_row), .rd_col(v_col), .rd_data(v_tile));
  assign in_ready = k_ready && v_ready;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill_and_read();
    vec_t x;
    int n;
    x = rand_vec(T * C, QMIN, QMAX);
    n = 0;
    for (int g = 0; g < T / WTP; g++)
      for (int cg = 0; cg < C / WCP; cg++) begin
        @(negedge clk);
        while ($urandom_range(99) < 40) @(negedge clk);
        for (int t = 0; t < WTP; t++)
          for (int c = 0; c < WCP; c++)
            in_data[(t*WCP + c)*ACT_W +: ACT_W] = ACT_W'(x[(g*WTP + t)*C + cg*WCP + c]);
        in_valid = 1;
        checks++;
        if (!in_ready || k_full || v_full) begin failures++; $display("not ready before full"); end
        @(posedge clk);
        @(negedge clk) in_valid = 0;
      end
    @(negedge clk);
    checks += 2;
    if (!k_full || !v_full) begin failures++; $display("full not set"); end
    if (in_ready) begin failures++; $display("accepting while full"); end
    for (int r = 0; r < 2; r++)
      for (int cc = 0; cc < 2; cc++) begin
        k_row = 1'(r); k_col = 1'(cc); v_row = 1'(r); v_col = 1'(cc);
        #1;
        for (int i = 0; i < KR; i++)
          for (int j = 0; j < KC; j++) begin
            checks++;
            if (int'(act_t'(k_tile[(i*KC + j)*ACT_W +: ACT_W])) != x[(r*KR + i)*C + cc*KC + j]) begin
              failures++; $display("K read mismatch");
            end
          end
        for (int i = 0; i < VR; i++)
          for (int j = 0; j < VC; j++) begin
            checks++;
            if (int'(act_t'(v_tile[(i*VC + j)*ACT_W +: ACT_W])) != x[(cc*VC + j)*C + r*VR + i]) begin
              failures++; $display("V read mismatch");
            end
          end
      end
    @(negedge clk) rel = 1;
    @(negedge clk) rel = 0;
    checks++;
    if (k_full || v_full || !in_ready) begin failures++; $display("release did not free"); end
  endtask

  initial begin
    in_valid = 0; in_data = '0; rel = 0; k_row = 0; k_col = 0; v_row = 0; v_col = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fill_and_read();
    fill_and_read();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
