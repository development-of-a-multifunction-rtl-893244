// tb_workload_acquisition: the two acquisition workloads of the board's
// published measurements, at their real time scales, on the full firmware
// with default parameters.
//
//  A. Triangular-envelope excitation test: a 2 s mercury pulse whose
//     amplitude ramps up for 1 s (OSK high) and down for 1 s (OSK low, switch
//     still closed), digitised at 1 kHz by the board's own ADC for the whole
//     pulse. The micro-timer table is: 100 us HgExcUpd, 1 s enHgExc+OskHg+
//     enAdc, 1 s enHgExc+enAdc, end.
//  B. Mercury precession readout at 100 Hz (the typical experiment rate),
//     here for 1 s: one 1 s step with enAdc.
//
// In both, the host side empties the 1k-word FIFO in real time through the
// USB bus every 100 us, as the published system does. Checks: the OSK and
// enable windows last exactly 1 s and 2 s (10,000,000 and 20,000,000 clocks),
// the DDS update precedes the switch closure, every sample arrives in order
// with the ADC model's value, the sample count is duration / period, and the
// FIFO never overflows.
module tb_workload_acquisition;
  import nedm_pkg::*;

  logic                  clk = 1'b0, rst = 1'b1;
  logic [BUS_AW-1:0]     bus_addr = '0;
  logic [BUS_DW-1:0]     bus_wdata = '0, bus_rdata;
  logic                  bus_we = 1'b0, bus_re = 1'b0, bus_rvalid;
  dds_bus_t              dds0, dds1, dds2, dds3;
  logic                  upd01, upd23, osk_hg, osk_neu, en_hg_exc, en_neu_exc, clk_500k;
  logic [N_SF-1:0]       en_spin_flipper;
  logic [N_TTL-1:0]      ttl_out;
  logic [3:0]            utimer_stage;
  logic                  adc_cnv, adc_sck, adc_sdo;
  logic [N_CNT-1:0]      cnt_in = '0;
  int                    checks = 0, failures = 0;

  nedm_fpga_top dut (
    .clk_10m (clk), .rst, .bus_addr, .bus_wdata, .bus_we, .bus_re, .bus_rdata, .bus_rvalid,
    .dds0, .dds1, .upd01, .osk_hg, .en_hg_exc,
    .dds2, .dds3, .upd23, .osk_neu, .en_neu_exc, .clk_500k,
    .en_spin_flipper, .ttl_out, .utimer_stage,
    .adc_cnv, .adc_sck, .adc_sdo, .cnt_in
  );
  ad7685_model adc (.cnv (adc_cnv), .sck (adc_sck), .sdo (adc_sdo));

  always #50 clk = ~clk;

  initial begin : watchdog
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("%t %s: got %0d expected %0d", $time, what, got, exp);
    end
  endtask

  task automatic bus_write(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    bus_addr = a; bus_wdata = d; bus_we = 1'b1;
    @(negedge clk);
    bus_we = 1'b0;
  endtask

  task automatic bus_read(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_addr = a; bus_re = 1'b1;
    @(negedge clk);
    bus_re = 1'b0;
    d = bus_rdata;
  endtask

  function automatic logic [15:0] adc_value(input int k);
    return 16'(k * 16'h1357) ^ 16'hA5C3;
  endfunction

  // clock counts of the OSK and enable windows, time of the update pulse
  longint n_osk = 0, n_en = 0, t_upd = 0, t_en = 0;
  always @(posedge clk) begin
    #1;
    if (osk_hg) n_osk++;
    if (en_hg_exc) begin
      if (n_en == 0) t_en = $time;
      n_en++;
    end
    if (upd01 && t_upd == 0) t_upd = $time;
  end

  // Run the loaded table with real-time FIFO readout until the timer stops.
  task automatic run_and_read(input int adc0, output int n_read);
    logic [31:0] d;
    n_read = 0;
    bus_write(REG_CTRL, 32'h1);
    do begin
      repeat (1000) @(negedge clk);          // 100 us between polls
      bus_read(REG_STATUS, d);
      check("no FIFO overflow", d[7], 0);
      while (d[26:16] != 0) begin
        logic [31:0] s;
        bus_read(REG_FIFO, s);
        check("sample value", s, 32'(adc_value(adc0 + n_read)));
        n_read++;
        d[26:16] = d[26:16] - 1;
      end
      bus_read(REG_STATUS, d);
    end while (d[4]);
    bus_write(REG_CTRL, 32'h0);
  endtask

  initial begin
    int adc0, n;
    repeat (5) @(posedge clk);
    rst = 1'b0;
    for (int i = 0; i < 40; i++) bus_write(BASE_DDS_HG + 16'(i), 32'($urandom));

    // ---- A: 2 s triangular pulse sampled at 1 kHz
    bus_write(REG_SAMPLING, 32'd10_000);              // 1 ms
    bus_write(BASE_UTIMER + 0, 32'd100);
    bus_write(BASE_UTIMER + 1, 32'(1) << ACT_HG_UPD);
    bus_write(BASE_UTIMER + 2, 32'd1_000_000);        // 1 s ramp up
    bus_write(BASE_UTIMER + 3, (32'(1) << ACT_EN_HG) | (32'(1) << ACT_OSK_HG) | (32'(1) << ACT_EN_ADC));
    bus_write(BASE_UTIMER + 4, 32'd1_000_000);        // 1 s ramp down
    bus_write(BASE_UTIMER + 5, (32'(1) << ACT_EN_HG) | (32'(1) << ACT_EN_ADC));
    bus_write(BASE_UTIMER + 6, 32'd0);
    adc0 = adc.n_conv;
    run_and_read(adc0, n);
    check("A: OSK window (clocks)", n_osk, 10_000_000);
    check("A: switch window (clocks)", n_en, 20_000_000);
    check("A: DDS updated before the switch closes", (t_upd != 0 && t_upd < t_en), 1);
    check("A: samples (2 s at 1 kHz)", n, 2000);
    check("A: conversions", adc.n_conv - adc0, 2000);

    // ---- B: precession readout at 100 Hz for 1 s
    bus_write(REG_SAMPLING, 32'd100_000);             // 10 ms
    bus_write(BASE_UTIMER + 0, 32'd1_000_000);
    bus_write(BASE_UTIMER + 1, 32'(1) << ACT_EN_ADC);
    bus_write(BASE_UTIMER + 2, 32'd0);
    adc0 = adc.n_conv;
    run_and_read(adc0, n);
    check("B: samples (1 s at 100 Hz)", n, 100);
    check("B: no early read", adc.early_read, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
