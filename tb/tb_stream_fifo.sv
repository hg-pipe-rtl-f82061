// tb_stream_fifo: random push/pop traffic against a queue model.
// A 5-deep FIFO (not a power of two, so the pointer wrap is exercised) is
// driven with random valid and ready; every popped word is compared with the
// queue model, and the occupancy, full and empty flags are checked each cycle.
module tb_stream_fifo;
  localparam int W = 8, DEPTH = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;

  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  logic [W-1:0] model[$];
  int n_full = 0;
  logic stalled = 1'b0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // keep an offered word stable until it is taken
      if (!stalled) begin
        in_valid = ($urandom_range(99) < ((cyc / 500) % 2 ? 80 : 30));
        in_data  = W'($urandom);
      end
      out_ready = ($urandom_range(99) < ((cyc / 500) % 2 ? 30 : 80));
      #1;
      checks++;
      if (count != model.size() || in_ready != (model.size() < DEPTH) || out_valid != (model.size() > 0)) begin
        failures++;
        $display("flag mismatch: count=%0d model=%0d", count, model.size());
      end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != model[0]) begin
          failures++;
          $display("data mismatch: got %0h exp %0h", out_data, model[0]);
        end
      end
      if (model.size() == DEPTH) n_full++;
      stalled = in_valid && !in_ready;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      #1;
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FIFO never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
