// tb_recip_lut: checks both segments of the reciprocal table.
// For the range [255, 196*255] the pivot is 255 + 49725/8 = 6470; segment 0
// steps by 2^7 = 128 (63*128 >= 6215), segment 1 by 2^10 = 1024
// (63*1024 >= 43510).  Expected value: round(65025 / x_mid), saturated at 255.
module tb_recip_lut;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] x;
  logic [7:0]  r;
  recip_lut #(.X_W(32), .ALPHA(255), .BETA(196 * 255), .NUM(65025.0)) dut (.x(x), .r(r));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seg_hits[2] = '{0, 0};
    for (int v = 255; v < 52000; v += 37) begin
      int idx, ex, base, step, seg;
      real mid;
      x = 32'(v);
      #1;
      seg  = (v >= 6470) ? 1 : 0;
      base = seg ? 6470 : 255;
      step = seg ? 1024 : 128;
      idx  = (v - base) / step;
      if (idx > 63) idx = 63;
      mid  = real'(base) + real'(idx * step) + real'(step / 2);
      ex   = $rtoi(65025.0 / mid + 0.5);
      if (ex > 255) ex = 255;
      seg_hits[seg]++;
      checks++;
      if (int'(r) != ex) begin
        failures++;
        $display("x=%0d r=%0d exp=%0d", v, r, ex);
      end
    end
    checks++;
    if (seg_hits[0] == 0 || seg_hits[1] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
