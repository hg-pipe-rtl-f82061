// tb_exp_lut: sweeps diff = max - x and compares with
// round(255 * exp(-(diff >> 3) * 8 * 0.0625)); diff = 0 must give 255.
module tb_exp_lut;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [20:0] diff;
  logic [7:0]  e;
  exp_lut #(.DIFF_W(21), .SHIFT(3), .IN_SCALE(0.0625)) dut (.diff(diff), .e(e));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 700; v++) begin
      int idx, ex;
      diff = 21'(v);
      #1;
      idx = v / 8;
      if (idx > 63) idx = 63;
      ex = $rtoi(255.0 * $exp(-real'(idx) * 0.5) + 0.5);
      checks++;
      if (int'(e) != ex) begin
        failures++;
        $display("diff=%0d e=%0d exp=%0d", v, e, ex);
      end
    end
    diff = 0; #1; checks++;
    if (e != 8'd255) begin failures++; $display("exp(0) != 255"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
