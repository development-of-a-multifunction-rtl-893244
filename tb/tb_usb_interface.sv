// tb_usb_interface: self-checking test of the USB register bridge.
//
// The blocks behind the bridge are replaced by simple responders whose read
// data encodes the address they were given, one clock later, like a block
// RAM. The test checks address decoding of writes to the three memories,
// that reads from every region and register return the right source one
// clock after the strobe with bus_rvalid, that the control register gives a
// level `run` and one-clock update/clear pulses, the sampling-period
// register, the packing of the status word, and that FIFO pops happen only on
// reads of the FIFO register while it holds data.
module tb_usb_interface;
  import nedm_pkg::*;

  logic              clk = 1'b0, rst = 1'b1;
  logic [BUS_AW-1:0] bus_addr = '0;
  logic [BUS_DW-1:0] bus_wdata = '0, bus_rdata;
  logic              bus_we = 1'b0, bus_re = 1'b0, bus_rvalid;
  logic              run, hg_usb_upd, neu_usb_upd, scaler_clr, ovf_clr;
  logic [23:0]       sampling_period;
  logic              ut_we, hg_we, neu_we;
  logic [8:0]        ut_addr;
  logic [31:0]       ut_wdata, ut_rdata, sc_rdata;
  logic [9:0]        dds_addr;
  logic [15:0]       dds_wdata, hg_rdata, neu_rdata, fifo_dout;
  logic [4:0]        sc_sel;
  logic              fifo_rd, fifo_empty = 1'b0, adc_overflow = 1'b0;
  logic [10:0]       fifo_count = 11'd0;
  logic [3:0]        stage = 4'd0;
  logic              ut_busy = 1'b0, hg_busy = 1'b0, neu_busy = 1'b0;
  int                checks = 0, failures = 0;
  int                n_pops = 0, n_hg_pulse = 0, n_neu_pulse = 0, n_clr = 0, n_ovf = 0;

  usb_interface dut (.*);

  always #50 clk = ~clk;

  // responders: registered read data that encodes the address
  always_ff @(posedge clk) begin
    ut_rdata  <= 32'hC0DE_0000 | 32'(ut_addr);
    hg_rdata  <= 16'h1000 | 16'(dds_addr);
    neu_rdata <= 16'h2000 | 16'(dds_addr);
    sc_rdata  <= 32'h5C00_0000 | 32'(sc_sel);
    if (fifo_rd) begin
      fifo_dout <= 16'hF000 + 16'(n_pops);
      n_pops    <= n_pops + 1;
    end
    if (!rst && hg_usb_upd)  n_hg_pulse  <= n_hg_pulse + 1;
    if (!rst && neu_usb_upd) n_neu_pulse <= n_neu_pulse + 1;
    if (!rst && scaler_clr)  n_clr <= n_clr + 1;
    if (!rst && ovf_clr)     n_ovf <= n_ovf + 1;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%t %s: got %h expected %h", $time, what, got, exp);
    end
  endtask

  task automatic bus_write(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    bus_addr = a; bus_wdata = d; bus_we = 1'b1;
    #1;
    check("ut_we decode",  ut_we,  (a >= 16'h0200 && a < 16'h0400));
    check("hg_we decode",  hg_we,  (a >= 16'h0400 && a < 16'h0800));
    check("neu_we decode", neu_we, (a >= 16'h0800 && a < 16'h0C00));
    if (ut_we) begin
      check("ut addr", ut_addr, a[8:0]);
      check("ut data", ut_wdata, d);
    end
    if (hg_we || neu_we) begin
      check("dds addr", dds_addr, a[9:0]);
      check("dds data", dds_wdata, d[15:0]);
    end
    @(negedge clk);
    bus_we = 1'b0;
  endtask

  task automatic bus_read(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_addr = a; bus_re = 1'b1;
    @(negedge clk);
    bus_re = 1'b0;
    check("rvalid", bus_rvalid, 1);
    d = bus_rdata;
    @(negedge clk);
    check("rvalid drops", bus_rvalid, 0);
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    @(negedge clk);
    check("reset run", run, 0);
    check("reset period", sampling_period, 100);

    // memory writes land on the right port
    bus_write(16'h0200 + 16'd7, 32'hDEAD_BEEF);
    bus_write(16'h0400 + 16'd39, 32'h0000_1234);
    bus_write(16'h0800 + 16'd3, 32'h0000_ABCD);
    bus_write(16'h1005, 32'h1);           // scaler region is read-only

    // reads from every region
    bus_read(16'h0200 + 16'd9, d);   check("read utimer", d, 32'hC0DE_0009);
    bus_read(16'h0400 + 16'd17, d);  check("read hg", d, 32'h0000_1011);
    bus_read(16'h0800 + 16'd33, d);  check("read neu", d, 32'h0000_2021);
    bus_read(16'h1000 + 16'd11, d);  check("read scaler up", d, 32'h5C00_000B);
    bus_read(16'h1000 + 16'd16, d);  check("read scaler dn", d, 32'h5C00_0010);

    // control register: run is a level, the others one-clock pulses
    bus_write(16'h0000, 32'h1F);
    check("run set", run, 1);
    repeat (3) @(negedge clk);
    check("run holds", run, 1);
    check("hg pulse count", n_hg_pulse, 1);
    check("neu pulse count", n_neu_pulse, 1);
    check("clr pulse count", n_clr, 1);
    check("ovf pulse count", n_ovf, 1);
    bus_read(16'h0000, d);   check("read ctrl", d, 1);
    bus_write(16'h0000, 32'h0);
    check("run cleared", run, 0);
    bus_write(16'h0000, 32'h4);
    repeat (2) @(negedge clk);
    check("neu pulse only", n_neu_pulse, 2);
    check("hg unchanged", n_hg_pulse, 1);
    bus_write(16'h0000, 32'h2);
    repeat (2) @(negedge clk);
    check("hg pulse only", n_hg_pulse, 2);
    check("neu unchanged", n_neu_pulse, 2);
    bus_write(16'h0000, 32'h8);
    repeat (2) @(negedge clk);
    check("clr pulse only", n_clr, 2);
    check("hg still unchanged", n_hg_pulse, 2);
    check("ovf unchanged", n_ovf, 1);

    // sampling period
    bus_write(16'h0001, 32'hFF12_3456);
    check("sampling period", sampling_period, 24'h12_3456);
    bus_read(16'h0001, d);   check("read period", d, 32'h0012_3456);

    // status word
    stage = 4'hA; ut_busy = 1'b1; hg_busy = 1'b0; neu_busy = 1'b1;
    adc_overflow = 1'b1; fifo_empty = 1'b0; fifo_count = 11'd1000;
    bus_read(16'h0002, d);
    check("status", d, {5'd0, 11'd1000, 7'd0, 1'b0, 1'b1, 1'b1, 1'b0, 1'b1, 4'hA});

    // FIFO pops
    bus_read(16'h0003, d);   check("fifo word 0", d, 32'h0000_F000);
    bus_read(16'h0003, d);   check("fifo word 1", d, 32'h0000_F001);
    bus_read(16'h0002, d);
    check("no pop on status read", n_pops, 2);
    fifo_empty = 1'b1;
    bus_read(16'h0003, d);
    check("no pop when empty", n_pops, 2);
    check("empty FIFO reads 0", d, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
