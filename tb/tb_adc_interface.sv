// tb_adc_interface: self-checking test of the PMT ADC interface with a
// behavioural AD7685.
//
// Checks: (1) with a 10 us period (100 clocks, the minimum) and then a
// 23.7 us period, every conversion starts exactly one period after the
// previous one, no conversion is read out before the ADC's conversion time,
// the number of samples matches the enAdc window, and the FIFO returns the
// model's values in order; (2) no conversion starts while enAdc is low;
// (3) running long enough to overfill the 1024-word FIFO keeps the first 1024
// samples, sets the overflow flag, and ovf_clr clears it.
module tb_adc_interface;
  logic        clk = 1'b0, rst = 1'b1;
  logic        en_adc = 1'b0;
  logic [23:0] sampling_period = 24'd100;
  logic        adc_cnv, adc_sck, adc_sdo;
  logic        fifo_rd = 1'b0, fifo_empty, overflow, ovf_clr = 1'b0;
  logic [15:0] fifo_dout;
  logic [10:0] fifo_count;
  int          checks = 0, failures = 0;
  int          next_val = 0;     // index of the next expected sample

  adc_interface dut (
    .clk, .rst, .en_adc, .sampling_period, .adc_cnv, .adc_sck, .adc_sdo,
    .fifo_rd, .fifo_dout, .fifo_empty, .fifo_count, .overflow, .ovf_clr
  );
  ad7685_model adc (.cnv (adc_cnv), .sck (adc_sck), .sdo (adc_sdo));

  always #50 clk = ~clk;

  initial begin : watchdog
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%t %s: got %0d expected %0d", $time, what, got, exp);
    end
  endtask

  // sampling-period check on every conversion start after the first one
  realtime period_ns;
  bit      check_period = 1'b0;
  int      first_conv = 0;     // conversion count before the current window
  always @(posedge adc_cnv) begin
    #0;
    if (check_period && adc.n_conv > first_conv + 1)
      check("conversion spacing (ns)", longint'(adc.t_last_start - adc.t_prev_start),
            longint'(period_ns));
    if (!en_adc) check("start while disabled", 1, 0);
  end

  function automatic logic [15:0] value(input int k);
    return 16'(k * 16'h1357) ^ 16'hA5C3;
  endfunction

  task automatic drain(input int expect_n);
    int n = 0;
    while (!fifo_empty) begin
      @(negedge clk); fifo_rd = 1'b1;
      @(negedge clk); fifo_rd = 1'b0;
      check("sample value", longint'(fifo_dout), longint'(value(next_val)));
      next_val++;
      n++;
    end
    check("samples read", n, expect_n);
  endtask

  task automatic acquire(input int period, input int n_samples);
    int n0;
    sampling_period = 24'(period);
    period_ns       = real'(period) * 100.0;
    n0              = adc.n_conv;
    first_conv      = n0;
    check_period    = 1'b1;
    @(negedge clk); en_adc = 1'b1;
    @(posedge adc_cnv);
    // window of n_samples periods from the first start
    repeat (period * (n_samples - 1) + period / 2) @(negedge clk);
    en_adc = 1'b0;
    repeat (200) @(negedge clk);
    check_period = 1'b0;
    check("conversions", adc.n_conv - n0, n_samples);
    drain(n_samples);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 1'b0;
    repeat (500) @(negedge clk);
    check("idle: no conversion", adc.n_conv, 0);

    acquire(100, 40);     // 10 us
    acquire(237, 25);     // 23.7 us
    check("no early read", int'(adc.early_read), 0);
    check("no overflow yet", int'(overflow), 0);

    // overflow: 1030 samples into a 1024-word FIFO without reading
    sampling_period = 24'd100;
    @(negedge clk); en_adc = 1'b1;
    repeat (100 * 1030 - 50) @(negedge clk);
    en_adc = 1'b0;
    repeat (200) @(negedge clk);
    check("FIFO full count", int'(fifo_count), 1024);
    check("overflow flag", int'(overflow), 1);
    drain(1024);
    next_val += 6;        // the six dropped samples
    @(negedge clk); ovf_clr = 1'b1;
    @(negedge clk); ovf_clr = 1'b0;
    check("overflow cleared", int'(overflow), 0);
    acquire(150, 5);      // data flow resumes with the right values

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
