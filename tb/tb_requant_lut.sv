// tb_requant_lut: sweeps the input across and beyond the table range and
// compares with clamp(round(x_mid * SCALE)), where x_mid is the centre of the
// power-of-two bin the input falls in (integer arithmetic here).
module tb_requant_lut;
  import hg_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [19:0] x;
  act_t y;
  requant_lut #(.IN_W(20), .ALPHA(-128), .SHIFT(2), .SCALE(0.03125)) dut (.x(x), .y(y));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -400; v <= 400; v++) begin
      int idx, mid, e;
      x = 20'(v);
      #1;
      idx = (v + 128) / 4;
      if (v < -128) idx = 0;
      if (idx > 63) idx = 63;
      mid = -128 + 4 * idx + 2;            // bin centre
      // round(mid / 32) with ties away from zero, then clamp to 3 bits
      e = (mid >= 0) ? (mid + 16) / 32 : -((-mid + 16) / 32);
      if (e > 3) e = 3;
      if (e < -4) e = -4;
      checks++;
      if (int'(y) != e) begin
        failures++;
        $display("x=%0d y=%0d exp=%0d", v, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
