// tb_nedm_fpga_top: end-to-end test of the whole firmware at its default
// parameters, driven only through the USB register bus, with a behavioural
// AD7685 on the ADC pins and pulse generators on the twelve counter inputs.
//
// Run 1 is a shortened EDM measurement cycle (microseconds instead of
// seconds), as the micro-timer would play it:
//   step 0  30 us  TTL0 (UCN valve), HgExcUpd, NeuExcUpd
//   step 1  10 us  TTL1 (Hg valve)
//   step 2  20 us  enHgExc, OskHg               (mercury pi/2 pulse)
//   step 3  20 us  enNeuExc, OskNeu, enAdc      (first neutron pulse)
//   step 4 100 us  enAdc                        (free precession)
//   step 5  20 us  enNeuExc, OskNeu, enAdc      (second neutron pulse)
//   step 6  50 us  TTL0, enSpinUpCnt            (count spin up)
//   step 7  50 us  TTL0, enSpinFlipper[0], enSpinDnCnt (count spin down)
//   step 8  duration 0: end of table
// Expected values are worked out in the testbench: the DDS bytes from what it
// wrote to the parameter memories, the update latency (one clock to see the
// request plus 4*40+1 clocks of transfer), the pulse lengths from the
// durations, the ADC samples from the ADC model sequence, and the scaler
// counts from the known pulse times of each input and the step window.
// Run 2 fills the ADC FIFO past 1024 words to provoke an overflow, run 3 is
// aborted by clearing `run`. Every mechanism must happen at least once.
module tb_nedm_fpga_top;
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

  int checks = 0, failures = 0;
  // mechanism counters
  int n_utimer_upd = 0, n_usb_upd = 0, n_adc_samples = 0, n_overflow = 0;
  int n_up_counts = 0, n_dn_counts = 0, n_clear = 0, n_abort = 0;
  int n_osk = 0, n_spin_flip = 0, n_ttl = 0, n_end_by_zero = 0;

  nedm_fpga_top dut (
    .clk_10m (clk), .rst, .bus_addr, .bus_wdata, .bus_we, .bus_re, .bus_rdata, .bus_rvalid,
    .dds0, .dds1, .upd01, .osk_hg, .en_hg_exc,
    .dds2, .dds3, .upd23, .osk_neu, .en_neu_exc, .clk_500k,
    .en_spin_flipper, .ttl_out, .utimer_stage,
    .adc_cnv, .adc_sck, .adc_sdo, .cnt_in
  );
  ad7685_model adc (.cnv (adc_cnv), .sck (adc_sck), .sdo (adc_sdo));

  always #50 clk = ~clk;     // 10 MHz atomic clock

  initial begin : watchdog
    repeat (600_000) @(posedge clk);
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

  // ---------------------------------------------------------------- bus
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

  // ------------------------------------------------ counter input pulses
  // Input i: 5 ns pulses, rising edges at 13 + k*(110 + 20*i) ns. Edges are
  // never on a multiple of 10 ns, so never on a clock edge.
  function automatic longint edge_time(input int i, input longint k);
    return 13 + k * (110 + 20 * i);
  endfunction
  bit pulses_on = 1'b0;
  for (genvar i = 0; i < N_CNT; i++) begin : g_pulse
    initial begin
      longint k = 0;
      wait (pulses_on);
      while (edge_time(i, k) <= $time) k++;
      forever begin
        #(edge_time(i, k) - $time);
        cnt_in[i] = 1'b1; #5; cnt_in[i] = 1'b0;
        k++;
      end
    end
  end
  // number of rising edges of input i strictly inside (t0, t1)
  function automatic longint pulses_between(input int i, input longint t0, input longint t1);
    longint n = 0;
    for (longint k = 0; edge_time(i, k) < t1; k++) if (edge_time(i, k) > t0) n++;
    return n;
  endfunction

  // --------------------------------------------------- DDS bus monitors
  logic [7:0] got0 [$], got1 [$], got2 [$], got3 [$];
  logic [5:0] gadr0 [$], gadr2 [$];
  logic       wr0_q = 1'b1, wr2_q = 1'b1;
  always @(posedge clk) begin
    if (!rst && !wr0_q && dds0.wr_n) begin got0.push_back(dds0.data); got1.push_back(dds1.data); gadr0.push_back(dds0.addr); end
    if (!rst && !wr2_q && dds2.wr_n) begin got2.push_back(dds2.data); got3.push_back(dds3.data); gadr2.push_back(dds2.addr); end
    wr0_q <= dds0.wr_n;
    wr2_q <= dds2.wr_n;
  end

  // time stamps of rising edges and high-run lengths (in clocks)
  longint t_upd01 [$], t_upd23 [$];
  int     len_hg [$], len_neu [$], len_oskhg [$], len_oskneu [$], len_sf0 [$];
  int     c_hg = 0, c_neu = 0, c_oh = 0, c_on = 0, c_sf = 0;
  logic   upd01_q = 1'b0, upd23_q = 1'b0;
  logic [3:0] stage_seen [$];
  logic [3:0] stage_q = 4'd0;
  always @(posedge clk) begin
    #1;
    if (upd01 && !upd01_q) t_upd01.push_back($time);
    if (upd23 && !upd23_q) t_upd23.push_back($time);
    upd01_q = upd01; upd23_q = upd23;
    if (en_hg_exc) c_hg++;  else if (c_hg > 0) begin len_hg.push_back(c_hg); c_hg = 0; end
    if (en_neu_exc) c_neu++; else if (c_neu > 0) begin len_neu.push_back(c_neu); c_neu = 0; end
    if (osk_hg) c_oh++;     else if (c_oh > 0) begin len_oskhg.push_back(c_oh); c_oh = 0; end
    if (osk_neu) c_on++;    else if (c_on > 0) begin len_oskneu.push_back(c_on); c_on = 0; end
    if (en_spin_flipper[0]) c_sf++; else if (c_sf > 0) begin len_sf0.push_back(c_sf); c_sf = 0; end
    if (ttl_out != '0) n_ttl++;
    if (utimer_stage != stage_q) stage_seen.push_back(utimer_stage);
    stage_q = utimer_stage;
  end

  function automatic logic [15:0] adc_value(input int k);
    return 16'(k * 16'h1357) ^ 16'hA5C3;
  endfunction

  // ------------------------------------------------------------ test
  localparam int NSTEP = 8;
  int          dur  [NSTEP] = '{30, 10, 20, 20, 100, 20, 50, 50};
  logic [31:0] mask [NSTEP];
  logic [15:0] hg_words [40], neu_words [40];

  function automatic logic [31:0] bit_of(input int b);
    return 32'(1) << b;
  endfunction

  initial begin
    logic [31:0] d;
    longint      t_run, t_step [NSTEP + 1];
    int          acc, adc0;

    mask[0] = bit_of(ACT_TTL0 + 0) | bit_of(ACT_HG_UPD) | bit_of(ACT_NEU_UPD);
    mask[1] = bit_of(ACT_TTL0 + 1);
    mask[2] = bit_of(ACT_EN_HG) | bit_of(ACT_OSK_HG);
    mask[3] = bit_of(ACT_EN_NEU) | bit_of(ACT_OSK_NEU) | bit_of(ACT_EN_ADC);
    mask[4] = bit_of(ACT_EN_ADC);
    mask[5] = bit_of(ACT_EN_NEU) | bit_of(ACT_OSK_NEU) | bit_of(ACT_EN_ADC);
    mask[6] = bit_of(ACT_TTL0 + 0) | bit_of(ACT_SPIN_UP_CNT);
    mask[7] = bit_of(ACT_TTL0 + 0) | bit_of(ACT_SF0) | bit_of(ACT_SPIN_DN_CNT);

    repeat (5) @(posedge clk);
    rst = 1'b0;
    pulses_on = 1'b1;

    // ---- load the micro-timer table and the DDS memories
    for (int k = 0; k < 16; k++) begin
      bus_write(BASE_UTIMER + 16'(2*k),     (k < NSTEP) ? 32'(dur[k]) : 32'd0);
      bus_write(BASE_UTIMER + 16'(2*k + 1), (k < NSTEP) ? mask[k] : 32'd0);
    end
    for (int i = 0; i < 40; i++) begin
      hg_words[i]  = 16'($urandom);
      neu_words[i] = 16'($urandom);
      bus_write(BASE_DDS_HG  + 16'(i), 32'(hg_words[i]));
      bus_write(BASE_DDS_NEU + 16'(i), 32'(neu_words[i]));
    end
    bus_read(BASE_UTIMER + 16'd9, d);  check("table readback", d, mask[4]);
    bus_read(BASE_DDS_HG + 16'd7, d);  check("Hg RAM readback", d, 32'(hg_words[7]));
    bus_write(REG_SAMPLING, 32'd100);  // 10 us

    // ---- USB-requested update of the neutron pair
    bus_write(REG_CTRL, 32'h4);
    repeat (250) @(negedge clk);
    check("USB update: one upd23 pulse", t_upd23.size(), 1);
    check("USB update: 40 bytes", got2.size(), 40);
    for (int i = 0; i < got2.size() && i < 40; i++) begin
      check("USB update DDS2 addr", gadr2[i], i);
      check("USB update DDS2 byte", got2[i], neu_words[i][7:0]);
      check("USB update DDS3 byte", got3[i], neu_words[i][15:8]);
    end
    if (t_upd23.size() == 1) n_usb_upd++;
    got2.delete(); got3.delete(); gadr2.delete(); t_upd23.delete();

    // ---- clear the scalers, check they read 0
    bus_write(REG_CTRL, 32'h8);
    n_clear++;
    bus_read(BASE_SCALER + 16'd3, d);  check("cleared up[3]", d, 0);
    bus_read(BASE_SCALER + 16'd20, d); check("cleared dn[4]", d, 0);

    // ---- run 1: the shortened EDM cycle
    adc0 = adc.n_conv;
    @(negedge clk);
    bus_addr = REG_CTRL; bus_wdata = 32'h1; bus_we = 1'b1;
    @(posedge clk);                     // Ew: the bridge registers run
    t_run = $time;
    @(negedge clk); bus_we = 1'b0;
    // step k starts 1 + 3 clocks after Ew (run seen, 3-clock fetch)
    acc = 4;
    for (int k = 0; k <= NSTEP; k++) begin
      t_step[k] = t_run + longint'(acc) * 100;
      if (k < NSTEP) acc += dur[k] * 10;
    end
    wait ($time > t_step[NSTEP] + 1000);
    bus_read(REG_STATUS, d);
    check("run 1 ended (busy low)", d[4], 0);
    if (d[4] == 1'b0) n_end_by_zero++;
    check("last stage", d[3:0], NSTEP - 1);

    // stages 0..7 in order (plus, if random reset left stage 0, no first entry)
    for (int k = 0, j = 0; k < stage_seen.size(); k++) begin
      check("stage order", stage_seen[k], k + (stage_seen[0] == 4'd0 ? 0 : 1));
    end
    check("stage changes", stage_seen.size(), NSTEP - 1);

    // DDS updates from the micro-timer, constant latency 1 + 161 clocks
    check("upd01 pulses", t_upd01.size(), 1);
    check("upd23 pulses", t_upd23.size(), 1);
    if (t_upd01.size() == 1) begin
      check("upd01 latency (clocks)", (t_upd01[0] - 1 - t_step[0]) / 100, 162);
      n_utimer_upd++;
    end
    if (t_upd23.size() == 1) begin
      check("upd23 latency (clocks)", (t_upd23[0] - 1 - t_step[0]) / 100, 162);
      n_utimer_upd++;
    end
    check("Hg pair bytes", got0.size(), 40);
    check("Neu pair bytes", got2.size(), 40);
    for (int i = 0; i < 40 && i < got0.size() && i < got2.size(); i++) begin
      check("DDS0 byte", got0[i], hg_words[i][7:0]);
      check("DDS1 byte", got1[i], hg_words[i][15:8]);
      check("DDS2 byte", got2[i], neu_words[i][7:0]);
      check("DDS3 byte", got3[i], neu_words[i][15:8]);
    end

    // excitation enables and OSK lines
    check("enHgExc pulses", len_hg.size(), 1);
    if (len_hg.size() > 0) check("enHgExc length", len_hg[0], 200);
    check("OskHg pulses", len_oskhg.size(), 1);
    if (len_oskhg.size() > 0) check("OskHg length", len_oskhg[0], 200);
    check("enNeuExc pulses", len_neu.size(), 2);
    check("OskNeu pulses", len_oskneu.size(), 2);
    foreach (len_oskneu[i]) check("OskNeu length", len_oskneu[i], 200);
    foreach (len_neu[i])    check("enNeuExc length", len_neu[i], 200);
    n_osk = len_oskhg.size() + len_oskneu.size();
    check("spin flipper 0 pulses", len_sf0.size(), 1);
    if (len_sf0.size() > 0) check("spin flipper 0 length", len_sf0[0], 500);
    n_spin_flip = len_sf0.size();

    // ADC: enAdc for steps 3..5 = 140 us at 10 us -> 14 samples
    check("ADC conversions", adc.n_conv - adc0, 14);
    bus_read(REG_STATUS, d);
    check("FIFO count", d[26:16], 14);
    for (int k = 0; k < 14; k++) begin
      bus_read(REG_FIFO, d);
      check("ADC sample", d, 32'(adc_value(adc0 + k)));
      n_adc_samples++;
    end
    check("ADC no early read", adc.early_read, 0);

    // scalers: pulses inside the step-6 (up) and step-7 (down) windows
    for (int i = 0; i < N_CNT; i++) begin
      longint e_up, e_dn;
      e_up = pulses_between(i, t_step[6], t_step[7]);
      e_dn = pulses_between(i, t_step[7], t_step[8]);
      bus_read(BASE_SCALER + 16'(i), d);       check($sformatf("scaler up[%0d]", i), d, e_up);
      bus_read(BASE_SCALER + 16'(16 + i), d);  check($sformatf("scaler dn[%0d]", i), d, e_dn);
      if (d != 0) n_dn_counts++;
      if (e_up != 0) n_up_counts++;
    end

    // ---- run 2: ADC for 10.5 ms at 10 us -> FIFO overflow
    bus_write(REG_CTRL, 32'h0);
    bus_write(BASE_UTIMER + 16'd0, 32'd10_500);
    bus_write(BASE_UTIMER + 16'd1, bit_of(ACT_EN_ADC));
    bus_write(BASE_UTIMER + 16'd2, 32'd0);
    adc0 = adc.n_conv;
    bus_write(REG_CTRL, 32'h1);
    repeat (106_000) @(negedge clk);
    bus_read(REG_STATUS, d);
    check("run 2 ended", d[4], 0);
    check("overflow flag", d[7], 1);
    check("FIFO full", d[26:16], 1024);
    check("run 2 conversions", adc.n_conv - adc0, 1050);
    if (d[7]) n_overflow++;
    for (int k = 0; k < 1024; k++) begin
      bus_read(REG_FIFO, d);
      if (k % 128 == 0 || k == 1023) check("overflow run sample", d, 32'(adc_value(adc0 + k)));
    end
    bus_read(REG_STATUS, d);
    check("FIFO drained", d[8], 1);
    bus_write(REG_CTRL, 32'h10);       // clear overflow (run low)
    bus_read(REG_STATUS, d);
    check("overflow cleared", d[7], 0);

    // ---- run 3: abort
    bus_write(BASE_UTIMER + 16'd0, 32'd1000);
    bus_write(BASE_UTIMER + 16'd1, bit_of(ACT_TTL0 + 5));
    bus_write(REG_CTRL, 32'h1);
    repeat (200) @(negedge clk);
    check("run 3 TTL5 on", ttl_out[5], 1);
    bus_write(REG_CTRL, 32'h0);
    repeat (3) @(negedge clk);
    bus_read(REG_STATUS, d);
    check("aborted: busy low", d[4], 0);
    check("aborted: TTL off", ttl_out, 0);
    if (d[4] == 0 && ttl_out == 0) n_abort++;

    // clk_500k: 20 clocks per period
    begin
      longint t0, t1;
      @(posedge clk_500k); t0 = $time;
      @(posedge clk_500k); t1 = $time;
      check("clk_500k period (ns)", t1 - t0, 2000);
    end

    // ---- every mechanism happened
    $display("mechanisms: utimer DDS updates %0d, USB DDS updates %0d, ADC samples %0d,",
             n_utimer_upd, n_usb_upd, n_adc_samples);
    $display("  FIFO overflows %0d, spin-up counting channels %0d, spin-down %0d,",
             n_overflow, n_up_counts, n_dn_counts);
    $display("  scaler clears %0d, aborts %0d, OSK ramps %0d, spin flips %0d, TTL clocks %0d, table ends %0d",
             n_clear, n_abort, n_osk, n_spin_flip, n_ttl, n_end_by_zero);
    check("mech utimer DDS update", n_utimer_upd > 0, 1);
    check("mech USB DDS update", n_usb_upd > 0, 1);
    check("mech ADC sampling", n_adc_samples > 0, 1);
    check("mech FIFO overflow", n_overflow > 0, 1);
    check("mech spin-up counting", n_up_counts > 0, 1);
    check("mech spin-down counting", n_dn_counts > 0, 1);
    check("mech scaler clear", n_clear > 0, 1);
    check("mech abort", n_abort > 0, 1);
    check("mech OSK", n_osk > 0, 1);
    check("mech spin flipper", n_spin_flip > 0, 1);
    check("mech TTL", n_ttl > 0, 1);
    check("mech table end", n_end_by_zero > 0, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
