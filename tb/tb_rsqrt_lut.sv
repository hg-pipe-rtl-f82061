// tb_rsqrt_lut: sweeps x over and beyond the table range and compares with
// round(NUM / sqrt(x_mid)) saturated to 12 bits, bins of 2^SHIFT from 0.
module tb_rsqrt_lut;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int  SHIFT = 10;
  localparam real NUM   = 50000.0;
  logic [39:0] x;
  logic [11:0] r;
  rsqrt_lut #(.X_W(40), .ALPHA(0), .SHIFT(SHIFT), .NUM(NUM)) dut (.x(x), .r(r));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 70000; v += 53) begin
      int idx, ex;
      real mid;
      x = 40'(v);
      #1;
      idx = v >> SHIFT;
      if (idx > 63) idx = 63;
      mid = real'(idx * 1024 + 512);
      ex  = $rtoi(NUM / $sqrt(mid) + 0.5);
      if (ex > 4095) ex = 4095;
      checks++;
      if (int'(r) != ex) begin
        failures++;
        $display("x=%0d r=%0d exp=%0d", v, r, ex);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
