// usb_interface: register bridge between the USB 2.0 micro-controller and
// the firmware blocks.
//
// The micro-controller drives a simple synchronous word bus (16-bit word
// address, 32-bit data, one-clock write and read strobes on the 10 MHz
// clock). Read data is returned one clock after the read strobe with
// `bus_rvalid`. The bridge decodes the address map of nedm_pkg:
//
//   REG_CTRL      write: bit 0 run (level), bit 1 Hg DDS update request,
//                 bit 2 neutron DDS update request, bit 3 scaler clear,
//                 bit 4 ADC overflow clear (bits 1..4 are one-clock pulses);
//                 read: bit 0 run
//   REG_SAMPLING  ADC sampling period in 100 ns units (24 bits)
//   REG_STATUS    read: [3:0] micro-timer stage, [4] micro-timer running,
//                 [5] Hg DDS busy, [6] neutron DDS busy, [7] ADC overflow,
//                 [8] FIFO empty, [26:16] FIFO word count
//   REG_FIFO      read: pops one ADC sample (bits 15:0)
//   BASE_UTIMER   + 0..511   micro-timer RAM (32 bit)
//   BASE_DDS_HG   + 0..1023  mercury DDS pair RAM (16 bit)
//   BASE_DDS_NEU  + 0..1023  neutron DDS pair RAM (16 bit)
//   BASE_SCALER   + 0..11 spin-up bank, + 16..27 spin-down bank (read only)
//
// The published design only names this block and states what passes through
// it (run, sampling period, memory contents, update requests, counters,
// samples and the current stage). The bus protocol and the address map are
// this design's own; the micro-controller firmware on the other side is not
// part of it.
//
// Memory addresses and write data go to the RAM ports straight from the bus;
// only the write enables are decoded. Read data from every source arrives one
// clock after bus_re (the RAMs, the scaler multiplexer and the FIFO are all
// registered), so bus_rdata is selected by the registered source code.
module usb_interface
  import nedm_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  // micro-controller bus
  input  logic [BUS_AW-1:0] bus_addr,
  input  logic [BUS_DW-1:0] bus_wdata,
  input  logic              bus_we,
  input  logic              bus_re,
  output logic [BUS_DW-1:0] bus_rdata,
  output logic              bus_rvalid,
  // control outputs
  output logic              run,
  output logic              hg_usb_upd,
  output logic              neu_usb_upd,
  output logic              scaler_clr,
  output logic              ovf_clr,
  output logic [23:0]       sampling_period,
  // micro-timer RAM
  output logic              ut_we,
  output logic [8:0]        ut_addr,
  output logic [31:0]       ut_wdata,
  input  logic [31:0]       ut_rdata,
  // DDS RAMs
  output logic              hg_we,
  output logic              neu_we,
  output logic [9:0]        dds_addr,
  output logic [15:0]       dds_wdata,
  input  logic [15:0]       hg_rdata,
  input  logic [15:0]       neu_rdata,
  // scaler
  output logic [4:0]        sc_sel,
  input  logic [31:0]       sc_rdata,
  // ADC FIFO and status
  output logic              fifo_rd,
  input  logic [15:0]       fifo_dout,
  input  logic              fifo_empty,
  input  logic [10:0]       fifo_count,
  input  logic              adc_overflow,
  input  logic [3:0]        stage,
  input  logic              ut_busy,
  input  logic              hg_busy,
  input  logic              neu_busy
);
  typedef enum logic [2:0] {SRC_REG, SRC_UT, SRC_HG, SRC_NEU, SRC_SC, SRC_FIFO} src_t;

  logic        in_ut, in_hg, in_neu, in_sc;
  src_t        src_q;
  logic [31:0] reg_q;

  assign in_ut  = (bus_addr[15:9]  == BASE_UTIMER[15:9]);
  assign in_hg  = (bus_addr[15:10] == BASE_DDS_HG[15:10]);
  assign in_neu = (bus_addr[15:10] == BASE_DDS_NEU[15:10]);
  assign in_sc  = (bus_addr[15:5]  == BASE_SCALER[15:5]);

  assign ut_addr   = bus_addr[8:0];
  assign ut_wdata  = bus_wdata;
  assign ut_we     = bus_we && in_ut;
  assign dds_addr  = bus_addr[9:0];
  assign dds_wdata = bus_wdata[15:0];
  assign hg_we     = bus_we && in_hg;
  assign neu_we    = bus_we && in_neu;
  assign sc_sel    = bus_addr[4:0];
  assign fifo_rd   = bus_re && (bus_addr == REG_FIFO) && !fifo_empty;

  // Control and parameter registers.
  always_ff @(posedge clk) begin
    if (rst) begin
      run             <= 1'b0;
      hg_usb_upd      <= 1'b0;
      neu_usb_upd     <= 1'b0;
      scaler_clr      <= 1'b0;
      ovf_clr         <= 1'b0;
      sampling_period <= 24'd100;   // 10 us, the minimum period
    end else begin
      hg_usb_upd  <= 1'b0;
      neu_usb_upd <= 1'b0;
      scaler_clr  <= 1'b0;
      ovf_clr     <= 1'b0;
      if (bus_we && bus_addr == REG_CTRL) begin
        run         <= bus_wdata[0];
        hg_usb_upd  <= bus_wdata[1];
        neu_usb_upd <= bus_wdata[2];
        scaler_clr  <= bus_wdata[3];
        ovf_clr     <= bus_wdata[4];
      end
      if (bus_we && bus_addr == REG_SAMPLING) sampling_period <= bus_wdata[23:0];
    end
  end

  // Read path: select the source now, return its data next clock.
  always_ff @(posedge clk) begin
    if (rst) begin
      bus_rvalid <= 1'b0;
      src_q      <= SRC_REG;
      reg_q      <= '0;
    end else begin
      bus_rvalid <= bus_re;
      if (bus_re) begin
        reg_q <= '0;
        if (in_ut)       src_q <= SRC_UT;
        else if (in_hg)  src_q <= SRC_HG;
        else if (in_neu) src_q <= SRC_NEU;
        else if (in_sc)  src_q <= SRC_SC;
        else if (bus_addr == REG_FIFO) src_q <= fifo_empty ? SRC_REG : SRC_FIFO;
        else begin
          src_q <= SRC_REG;
          unique case (bus_addr)
            REG_CTRL:     reg_q <= {31'd0, run};
            REG_SAMPLING: reg_q <= {8'd0, sampling_period};
            REG_STATUS:   reg_q <= {5'd0, fifo_count, 7'd0, fifo_empty, adc_overflow,
                                    neu_busy, hg_busy, ut_busy, stage};
            default:      reg_q <= '0;
          endcase
        end
      end
    end
  end

  always_comb begin
    unique case (src_q)
      SRC_UT:   bus_rdata = ut_rdata;
      SRC_HG:   bus_rdata = {16'd0, hg_rdata};
      SRC_NEU:  bus_rdata = {16'd0, neu_rdata};
      SRC_SC:   bus_rdata = sc_rdata;
      SRC_FIFO: bus_rdata = {16'd0, fifo_dout};
      default:  bus_rdata = reg_q;
    endcase
  end

  a_no_rw: assert property (@(posedge clk) disable iff (rst) !(bus_we && bus_re));
endmodule
