// nedm_pkg: constants and types shared by the nEDM acquisition and control
// firmware.
//
// The firmware runs from a single 10 MHz clock (the rubidium atomic clock).
// This package fixes the bit positions of the micro-timer action mask and the
// word-address map seen by the USB micro-controller. The list of actions and
// their count come from the published design; the bit order of the mask and
// the whole address map are this design's own choice, since no positions were
// published.
package nedm_pkg;

  // ---------------------------------------------------------------------
  // Micro-timer
  // ---------------------------------------------------------------------
  localparam int unsigned N_STEPS    = 16;   // time sequences
  localparam int unsigned ACT_W      = 32;   // action-mask width
  localparam int unsigned DUR_W      = 32;   // duration width, 1 us units
  localparam int unsigned N_TTL      = 8;    // buffered TTL outputs
  localparam int unsigned N_SF       = 4;    // spin-flipper generators

  // Action-mask bit positions (order follows the published action list).
  localparam int unsigned ACT_TTL0        = 0;   // bits 7:0 TTLout[7:0]
  localparam int unsigned ACT_HG_UPD      = 8;   // HgExcUpd
  localparam int unsigned ACT_NEU_UPD     = 9;   // NeuExcUpd
  localparam int unsigned ACT_EN_HG       = 10;  // enHgExc
  localparam int unsigned ACT_EN_NEU      = 11;  // enNeuExc
  localparam int unsigned ACT_OSK_HG      = 12;  // OskHg
  localparam int unsigned ACT_OSK_NEU     = 13;  // OskNeu
  localparam int unsigned ACT_EN_ADC      = 14;  // enAdc
  localparam int unsigned ACT_SF0         = 15;  // bits 18:15 enSpinFlipper[3:0]
  localparam int unsigned ACT_SPIN_UP_CNT = 19;  // enSpinUpCnt
  localparam int unsigned ACT_SPIN_DN_CNT = 20;  // enSpinDnCnt

  // Decoded action bundle.
  typedef struct packed {
    logic             en_spin_dn_cnt;
    logic             en_spin_up_cnt;
    logic [N_SF-1:0]  en_spin_flipper;
    logic             en_adc;
    logic             osk_neu;
    logic             osk_hg;
    logic             en_neu_exc;
    logic             en_hg_exc;
    logic             neu_exc_upd;
    logic             hg_exc_upd;
    logic [N_TTL-1:0] ttl_out;
  } actions_t;  // 21 bits, laid out exactly like mask bits 20:0

  // Mask bits 31:21 are spare: they are stored in the table but drive
  // nothing, so the decoder leaves them unread.
  function automatic actions_t decode_actions(input logic [ACT_W-1:0] mask);
    return actions_t'(mask[$bits(actions_t)-1:0]);
  endfunction

  // ---------------------------------------------------------------------
  // USB register bus (word addresses, 32-bit data)
  // ---------------------------------------------------------------------
  localparam int unsigned BUS_AW = 16;
  localparam int unsigned BUS_DW = 32;

  localparam logic [BUS_AW-1:0] REG_CTRL     = 16'h0000; // W: [0] run, [1] Hg upd, [2] Neu upd, [3] scaler clear, [4] ADC overflow clear
  localparam logic [BUS_AW-1:0] REG_SAMPLING = 16'h0001; // R/W: ADC sampling period, 100 ns units (24 bit)
  localparam logic [BUS_AW-1:0] REG_STATUS   = 16'h0002; // R: see usb_interface
  localparam logic [BUS_AW-1:0] REG_FIFO     = 16'h0003; // R: pops one ADC sample
  localparam logic [BUS_AW-1:0] BASE_UTIMER  = 16'h0200; // 512 words, micro-timer RAM
  localparam logic [BUS_AW-1:0] BASE_DDS_HG  = 16'h0400; // 1024 words, Hg DDS pair RAM
  localparam logic [BUS_AW-1:0] BASE_DDS_NEU = 16'h0800; // 1024 words, neutron DDS pair RAM
  localparam logic [BUS_AW-1:0] BASE_SCALER  = 16'h1000; // 32 words: 0..11 bank up, 16..27 bank down

  // ---------------------------------------------------------------------
  // Scaler
  // ---------------------------------------------------------------------
  localparam int unsigned N_CNT = 12;
  localparam int unsigned CNT_W = 32;

  // ---------------------------------------------------------------------
  // AD9852 parallel bus to one DDS
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic [5:0] addr;   // register address 0x00..0x27
    logic [7:0] data;
    logic       wr_n;   // write strobe, data latched on its rising edge
  } dds_bus_t;

endpackage
