// tb_dds_interface: self-checking test of the DDS pair interface.
//
// The testbench fills the parameter RAM with random words, requests an update
// and records every byte the two chips would latch (on each rising edge of
// wr_n). It checks that registers 0..39 are written once each, in order, with
// the low byte of word i going to DDS A and the high byte to DDS B, that words
// beyond 39 are never sent, that `upd` rises only after the last write, stays
// high for 40 clocks, and that the request-to-update latency is the same
// 4*40 + 1 = 161 clocks for a USB request and for a micro-timer request. A second
// request arriving while a sequence runs must be ignored.
module tb_dds_interface;
  import nedm_pkg::*;

  localparam int N = 40;
  localparam int LAT = 4 * N + 1;   // clock edges from request to upd

  logic        clk = 1'b0, rst = 1'b1;
  logic        usb_upd = 1'b0, exc_upd = 1'b0;
  logic        ram_we = 1'b0;
  logic [9:0]  ram_addr = '0;
  logic [15:0] ram_wdata = '0, ram_rdata;
  dds_bus_t    dds_a, dds_b;
  logic        upd, busy;
  int          checks = 0, failures = 0;

  logic [15:0] words [64];
  int          n_wr, n_upd, upd_len;
  logic        wr_prev = 1'b1, upd_prev = 1'b0;
  logic [5:0]  got_addr [$];
  logic [7:0]  got_a [$], got_b [$];

  dds_interface dut (
    .clk, .rst, .usb_upd, .exc_upd, .ram_we, .ram_addr, .ram_wdata, .ram_rdata,
    .dds_a, .dds_b, .upd, .busy
  );

  always #50 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bus monitor: what the chips latch on the rising edge of wr_n
  always @(posedge clk) begin
    if (!wr_prev && dds_a.wr_n) begin
      got_addr.push_back(dds_a.addr);
      got_a.push_back(dds_a.data);
      got_b.push_back(dds_b.data);
      if (dds_b.addr != dds_a.addr) begin
        failures++;
        $display("DDS A/B address mismatch");
      end
    end
    wr_prev  <= dds_a.wr_n;
    upd_prev <= upd;
    if (upd && !upd_prev) n_upd++;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%t %s: got %0d expected %0d", $time, what, got, exp);
    end
  endtask

  // Issue a request on the selected source and check the whole transfer.
  task automatic do_update(input bit from_usb);
    int lat, len, upd0;
    got_addr.delete(); got_a.delete(); got_b.delete();
    upd0 = n_upd;
    @(negedge clk);
    if (from_usb) usb_upd = 1'b1; else exc_upd = 1'b1;
    @(negedge clk);
    if (from_usb) usb_upd = 1'b0;    // USB request is a one-clock pulse
    lat = 1;
    // a second request while busy must be ignored
    repeat (20) begin
      @(negedge clk); lat++;
    end
    usb_upd = 1'b1;
    @(negedge clk); lat++;
    usb_upd = 1'b0;
    while (!upd) begin
      @(negedge clk); lat++;
      if (lat > 1000) break;
    end
    check("update latency", lat - 1, LAT);   // lat counts the sampling edge too
    check("writes before update", got_addr.size(), N);
    len = 0;
    while (upd) begin
      @(negedge clk); len++;
      if (len > 1000) break;
    end
    check("update pulse width", len, 40);
    exc_upd = 1'b0;
    repeat (10) @(negedge clk);
    check("busy cleared", int'(busy), 0);
    check("one update pulse", n_upd - upd0, 1);
    check("total writes", got_addr.size(), N);
    for (int i = 0; i < got_addr.size() && i < N; i++) begin
      check("address", int'(got_addr[i]), i);
      check("DDS A byte", int'(got_a[i]), int'(words[i][7:0]));
      check("DDS B byte", int'(got_b[i]), int'(words[i][15:8]));
    end
  endtask

  initial begin
    n_upd = 0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int i = 0; i < 64; i++) begin
      words[i] = 16'($urandom);
      @(negedge clk);
      ram_we = 1'b1; ram_addr = 10'(i); ram_wdata = words[i];
    end
    @(negedge clk); ram_we = 1'b0; ram_addr = 10'd5;
    @(negedge clk); check("RAM readback", int'(ram_rdata), int'(words[5]));
    check("idle wr_n", int'(dds_a.wr_n), 1);
    check("idle upd", int'(upd), 0);

    do_update(1'b1);   // request from USB
    // new parameters, then request from the micro-timer
    for (int i = 0; i < N; i++) begin
      words[i] = 16'($urandom);
      @(negedge clk);
      ram_we = 1'b1; ram_addr = 10'(i); ram_wdata = words[i];
    end
    @(negedge clk); ram_we = 1'b0;
    do_update(1'b0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
