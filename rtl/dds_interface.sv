// dds_interface: configures one pair of AD9852 DDS (the two mercury or the
// two neutron excitation generators) and updates both at the same instant.
//
// The pair's configuration lives in a 1k x 16 block RAM filled by the USB
// side. Word i (i = 0 .. N_BYTES-1) holds the byte for register address i of
// both chips: the low byte goes to DDS A, the high byte to DDS B. Keeping the
// same frequency word with a different phase-offset word in the two halves is
// how the sine/cosine pair with a known phase relationship is produced.
//
// A write sequence starts on the rising edge of (usb_upd OR exc_upd), the
// update request from the USB interface or from the micro-timer table. The
// FSM then writes all N_BYTES registers of both chips in parallel on their
// 8-bit parallel ports, four clocks per byte (read RAM, drive address/data,
// write strobe low, strobe high: the chip latches on the rising edge of
// wr_n), and one clock after the last write raises the shared I/O-update
// line `upd` for UPD_WIDTH clocks so that both chips load the new values together. A request while a
// sequence runs is ignored. The latency from the request edge to the rising
// edge of `upd` is constant: 4*N_BYTES + 1 clocks (161 clocks, 16.1 us, at
// the defaults).
//
// From the published design: the pair per interface, the 1k x 16 memory, up
// to 40 configuration bytes per DDS with two bytes concatenated in one word,
// the start on the OR of the two update requests, the synchronous update of
// the pair with constant latency. This design's choices: low/high byte
// assignment, always writing all N_BYTES registers, the four-clock write
// cycle and the update pulse width (40 clocks, two periods of the 500 kHz DDS
// clock, so the chip samples it at least once).
module dds_interface
  import nedm_pkg::*;
#(
  parameter int unsigned N_BYTES   = 40,
  parameter int unsigned RAM_DEPTH = 1024,
  parameter int unsigned UPD_WIDTH = 40,
  localparam int unsigned RAW      = $clog2(RAM_DEPTH)
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           usb_upd,   // update request from USB
  input  logic           exc_upd,   // update request from the micro-timer
  // USB port of the parameter RAM
  input  logic           ram_we,
  input  logic [RAW-1:0] ram_addr,
  input  logic [15:0]    ram_wdata,
  output logic [15:0]    ram_rdata,
  // the two DDS of the pair
  output dds_bus_t       dds_a,
  output dds_bus_t       dds_b,
  output logic           upd,       // I/O update, common to both chips
  output logic           busy
);
  localparam int unsigned IW = $clog2(N_BYTES);
  localparam int unsigned UW = $clog2(UPD_WIDTH + 1);

  typedef enum logic [2:0] {IDLE, LOAD, SETUP, STROBE, HOLD, GAP, UPDATE} state_t;
  state_t state;

  logic          trig, trig_q;
  logic [IW-1:0] idx;
  logic [UW-1:0] upd_cnt;
  logic [15:0]   b_rdata;

  assign trig = usb_upd | exc_upd;

  dpram #(.DEPTH(RAM_DEPTH), .WIDTH(16)) u_ram (
    .clk     (clk),
    .a_we    (ram_we),
    .a_addr  (ram_addr),
    .a_wdata (ram_wdata),
    .a_rdata (ram_rdata),
    .b_addr  (RAW'(idx)),
    .b_rdata (b_rdata)
  );

  assign busy = (state != IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= IDLE;
      trig_q  <= 1'b0;
      idx     <= '0;
      upd_cnt <= '0;
      upd     <= 1'b0;
      dds_a   <= '{addr: '0, data: '0, wr_n: 1'b1};
      dds_b   <= '{addr: '0, data: '0, wr_n: 1'b1};
    end else begin
      trig_q <= trig;
      unique case (state)
        IDLE: begin
          idx <= '0;
          if (trig && !trig_q) state <= LOAD;
        end
        LOAD:   state <= SETUP;           // RAM address = idx
        SETUP: begin
          dds_a.addr <= 6'(idx);
          dds_b.addr <= 6'(idx);
          dds_a.data <= b_rdata[7:0];
          dds_b.data <= b_rdata[15:8];
          state      <= STROBE;
        end
        STROBE: begin
          dds_a.wr_n <= 1'b0;
          dds_b.wr_n <= 1'b0;
          state      <= HOLD;
        end
        HOLD: begin
          dds_a.wr_n <= 1'b1;
          dds_b.wr_n <= 1'b1;
          if (idx == IW'(N_BYTES - 1)) begin
            state <= GAP;
          end else begin
            idx   <= idx + 1'b1;
            state <= LOAD;
          end
        end
        GAP: begin                         // one clock after the last latch
          upd     <= 1'b1;
          upd_cnt <= UW'(UPD_WIDTH - 1);
          state   <= UPDATE;
        end
        UPDATE: begin
          if (upd_cnt == '0) begin
            upd   <= 1'b0;
            state <= IDLE;
          end else begin
            upd_cnt <= upd_cnt - 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // Both chips of the pair are always strobed together.
  a_pair_sync: assert property (@(posedge clk) disable iff (rst)
    dds_a.wr_n == dds_b.wr_n);
  // The address bus is stable while the write strobe is low.
  a_addr_stable: assert property (@(posedge clk) disable iff (rst)
    !dds_a.wr_n |=> $stable(dds_a.addr));
endmodule
