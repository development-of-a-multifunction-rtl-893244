// tb_freq_divider: checks that the divider turns the 10 MHz clock into a
// 500 kHz clock with a 50% duty cycle: every high and every low phase of the
// output must last exactly 10 input clocks, and the output must toggle.
module tb_freq_divider;
  logic clk = 1'b0, rst = 1'b1, clk_out;
  int   checks = 0, failures = 0;

  freq_divider dut (.clk(clk), .rst(rst), .clk_out(clk_out));

  always #50 clk = ~clk;   // 10 MHz

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int   run_len;
    logic prev;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    // skip the first (partial) phase
    prev = clk_out;
    while (clk_out == prev) @(posedge clk);
    for (int ph = 0; ph < 40; ph++) begin
      prev    = clk_out;
      run_len = 0;
      while (clk_out == prev) begin
        @(posedge clk);
        run_len++;
      end
      checks++;
      if (run_len != 10) begin
        failures++;
        $display("phase %0d (level %0b) lasted %0d clocks, expected 10", ph, prev, run_len);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
