// nedm_fpga_top: FPGA firmware of the nEDM acquisition and control board.
//
// Everything runs from the 10 MHz rubidium atomic clock. The USB
// micro-controller loads the micro-timer table and the two DDS parameter
// memories through usb_interface and then sets `run`. The micro-timer steps
// through its table; its action mask drives directly the eight TTL outputs,
// the four spin-flipper switch enables, the two excitation switch enables,
// the two OSK ramp pins, and internally the DDS update requests, the ADC
// enable and the two scaler gates. Each DDS interface writes its AD9852 pair
// when either the micro-timer or the USB side asks for an update, then
// strobes the pair's common update pin. The ADC interface samples the PMT
// signal while enAdc is set and queues samples for USB readout. The scaler
// counts the twelve detector inputs in two banks gated by enSpinUpCnt and
// enSpinDnCnt. The frequency divider gives the 500 kHz DDS reference clock.
// The 4-bit stage number is brought out for other modules.
//
// Structure and signal names follow the published firmware overview. That
// the whole firmware runs on the 10 MHz clock, with no faster internal clock,
// is this design's choice (the published text only says the atomic clock
// references the whole system). The ports are plain signals; the four AD9852
// buses use the dds_bus_t struct of nedm_pkg (address, data, write strobe). Off
// chip, and not part of this RTL: the AD9852 and AD9833 DDS, the analog
// switches, filters and amplifiers, the PMT conditioner, the AD7685 ADC, the
// slow-monitoring ADC and multiplexer and the USB micro-controller itself
// (which also programs the AD9833 spin-flipper DDS over its own SPI link).
module nedm_fpga_top
  import nedm_pkg::*;
(
  input  logic                  clk_10m,      // atomic clock
  input  logic                  rst,
  // USB micro-controller bus
  input  logic [BUS_AW-1:0]     bus_addr,
  input  logic [BUS_DW-1:0]     bus_wdata,
  input  logic                  bus_we,
  input  logic                  bus_re,
  output logic [BUS_DW-1:0]     bus_rdata,
  output logic                  bus_rvalid,
  // mercury excitation: AD9852 DDS0/DDS1
  output dds_bus_t              dds0,
  output dds_bus_t              dds1,
  output logic                  upd01,
  output logic                  osk_hg,
  output logic                  en_hg_exc,
  // neutron excitation: AD9852 DDS2/DDS3
  output dds_bus_t              dds2,
  output dds_bus_t              dds3,
  output logic                  upd23,
  output logic                  osk_neu,
  output logic                  en_neu_exc,
  output logic                  clk_500k,
  // spin flipper switches, TTL outputs, stage
  output logic [N_SF-1:0]       en_spin_flipper,
  output logic [N_TTL-1:0]      ttl_out,
  output logic [3:0]            utimer_stage,
  // PMT ADC (AD7685)
  output logic                  adc_cnv,
  output logic                  adc_sck,
  input  logic                  adc_sdo,
  // neutron detector counter inputs
  input  logic [N_CNT-1:0]      cnt_in
);
  logic [ACT_W-1:0] mask;
  actions_t         act;
  logic             run, ut_busy;
  logic             hg_usb_upd, neu_usb_upd, scaler_clr, ovf_clr;
  logic [23:0]      sampling_period;
  logic             ut_we, hg_we, neu_we;
  logic [8:0]       ut_addr;
  logic [31:0]      ut_wdata, ut_rdata;
  logic [9:0]       dds_addr;
  logic [15:0]      dds_wdata, hg_rdata, neu_rdata;
  logic             hg_busy, neu_busy;
  logic [4:0]       sc_sel;
  logic [31:0]      sc_rdata;
  logic             fifo_rd, fifo_empty, adc_overflow;
  logic [15:0]      fifo_dout;
  logic [10:0]      fifo_count;

  freq_divider u_div (.clk(clk_10m), .rst(rst), .clk_out(clk_500k));

  utimer u_utimer (
    .clk (clk_10m), .rst (rst), .run (run),
    .ram_we (ut_we), .ram_addr (ut_addr), .ram_wdata (ut_wdata), .ram_rdata (ut_rdata),
    .actions (mask), .stage (utimer_stage), .busy (ut_busy)
  );

  assign act             = decode_actions(mask);
  assign ttl_out         = act.ttl_out;
  assign en_hg_exc       = act.en_hg_exc;
  assign en_neu_exc      = act.en_neu_exc;
  assign osk_hg          = act.osk_hg;
  assign osk_neu         = act.osk_neu;
  assign en_spin_flipper = act.en_spin_flipper;

  dds_interface u_dds_hg (
    .clk (clk_10m), .rst (rst), .usb_upd (hg_usb_upd), .exc_upd (act.hg_exc_upd),
    .ram_we (hg_we), .ram_addr (dds_addr), .ram_wdata (dds_wdata), .ram_rdata (hg_rdata),
    .dds_a (dds0), .dds_b (dds1), .upd (upd01), .busy (hg_busy)
  );

  dds_interface u_dds_neu (
    .clk (clk_10m), .rst (rst), .usb_upd (neu_usb_upd), .exc_upd (act.neu_exc_upd),
    .ram_we (neu_we), .ram_addr (dds_addr), .ram_wdata (dds_wdata), .ram_rdata (neu_rdata),
    .dds_a (dds2), .dds_b (dds3), .upd (upd23), .busy (neu_busy)
  );

  scaler u_scaler (
    .clk (clk_10m), .cnt_in (cnt_in),
    .en_spin_up_cnt (act.en_spin_up_cnt), .en_spin_dn_cnt (act.en_spin_dn_cnt),
    .clr (scaler_clr), .rd_sel (sc_sel), .rd_data (sc_rdata)
  );

  adc_interface u_adc (
    .clk (clk_10m), .rst (rst), .en_adc (act.en_adc), .sampling_period (sampling_period),
    .adc_cnv (adc_cnv), .adc_sck (adc_sck), .adc_sdo (adc_sdo),
    .fifo_rd (fifo_rd), .fifo_dout (fifo_dout), .fifo_empty (fifo_empty),
    .fifo_count (fifo_count), .overflow (adc_overflow), .ovf_clr (ovf_clr)
  );

  usb_interface u_usb (
    .clk (clk_10m), .rst (rst),
    .bus_addr (bus_addr), .bus_wdata (bus_wdata), .bus_we (bus_we), .bus_re (bus_re),
    .bus_rdata (bus_rdata), .bus_rvalid (bus_rvalid),
    .run (run), .hg_usb_upd (hg_usb_upd), .neu_usb_upd (neu_usb_upd),
    .scaler_clr (scaler_clr), .ovf_clr (ovf_clr), .sampling_period (sampling_period),
    .ut_we (ut_we), .ut_addr (ut_addr), .ut_wdata (ut_wdata), .ut_rdata (ut_rdata),
    .hg_we (hg_we), .neu_we (neu_we), .dds_addr (dds_addr), .dds_wdata (dds_wdata),
    .hg_rdata (hg_rdata), .neu_rdata (neu_rdata),
    .sc_sel (sc_sel), .sc_rdata (sc_rdata),
    .fifo_rd (fifo_rd), .fifo_dout (fifo_dout), .fifo_empty (fifo_empty),
    .fifo_count (fifo_count), .adc_overflow (adc_overflow), .stage (utimer_stage),
    .ut_busy (ut_busy), .hg_busy (hg_busy), .neu_busy (neu_busy)
  );
endmodule
