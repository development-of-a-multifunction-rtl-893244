// adc_interface: acquisition of the PMT (mercury precession) signal with the
// AD7685 16-bit SAR ADC.
//
// While `en_adc` (a micro-timer action) is set, a conversion is started every
// `sampling_period` clocks of the 10 MHz atomic clock, i.e. in 100 ns steps;
// the first conversion starts on the clock after en_adc rises. The published
// range is 10 us to 1677 ms, i.e. 100 to 2^24-1 clocks, hence the 24-bit
// period register. A conversion raises CNV for CONV_CYCLES clocks (longer than
// the ADC's maximum conversion time), then drops CNV and clocks the 16 result
// bits out, MSB first, with 16 SCK pulses at half the system clock; SDO is
// sampled just before each rising SCK edge. The 16-bit word is pushed into a
// 1k x 16 FIFO that the USB side reads in real time. One sample takes
// CONV_CYCLES + 33 clocks (5.8 us at the defaults), below the 10 us minimum
// period. With a (non-published) period shorter than that, a start that
// falls during a read-out is skipped. A sample that finds the FIFO full is dropped and
// sets the sticky `overflow` flag, cleared by `ovf_clr`.
//
// The ADC is used in its 3-wire mode without busy indicator (SDI tied high on
// the board), so only CNV, SCK and SDO reach the FPGA. From the published
// design: the ADC, the FIFO size, the 100 ns period resolution and its range,
// gating by enAdc. This design's choices: the serial timing, the start of the
// first sample and the overflow handling.
module adc_interface #(
  parameter int unsigned PERIOD_W    = 24,
  parameter int unsigned CONV_CYCLES = 25,
  parameter int unsigned FIFO_DEPTH  = 1024,
  localparam int unsigned FAW        = $clog2(FIFO_DEPTH)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                en_adc,
  input  logic [PERIOD_W-1:0] sampling_period,
  // AD7685 pins
  output logic                adc_cnv,
  output logic                adc_sck,
  input  logic                adc_sdo,
  // FIFO read side
  input  logic                fifo_rd,
  output logic [15:0]         fifo_dout,
  output logic                fifo_empty,
  output logic [FAW:0]        fifo_count,
  // status
  output logic                overflow,
  input  logic                ovf_clr
);
  localparam int unsigned CCW = $clog2(CONV_CYCLES + 1);

  typedef enum logic [1:0] {IDLE, CONV, READ} state_t;
  state_t state;

  logic [PERIOD_W-1:0] pcnt;
  logic                start;
  logic [CCW-1:0]      ccnt;
  logic [4:0]          bitcnt;
  logic [15:0]         shreg;
  logic                push;
  logic                fifo_full;

  // Sampling-period counter: fires immediately when enabled, then every
  // sampling_period clocks.
  assign start = en_adc && (pcnt == '0);

  always_ff @(posedge clk) begin
    if (rst || !en_adc)      pcnt <= '0;
    else if (pcnt == '0)     pcnt <= sampling_period - 1'b1;
    else                     pcnt <= pcnt - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= IDLE;
      adc_cnv <= 1'b0;
      adc_sck <= 1'b0;
      ccnt    <= '0;
      bitcnt  <= '0;
      shreg   <= '0;
      push    <= 1'b0;
    end else begin
      push <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          adc_cnv <= 1'b1;
          ccnt    <= CCW'(CONV_CYCLES - 1);
          state   <= CONV;
        end
        CONV: begin
          if (ccnt == '0) begin
            adc_cnv <= 1'b0;      // MSB appears on SDO
            bitcnt  <= '0;
            state   <= READ;
          end else begin
            ccnt <= ccnt - 1'b1;
          end
        end
        READ: begin
          if (!adc_sck) begin
            // sample SDO, then rising SCK edge
            shreg   <= {shreg[14:0], adc_sdo};
            adc_sck <= 1'b1;
            bitcnt  <= bitcnt + 1'b1;
          end else begin
            // falling SCK edge shifts the next bit out
            adc_sck <= 1'b0;
            if (bitcnt == 5'd16) begin
              push  <= 1'b1;
              state <= IDLE;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst || ovf_clr)       overflow <= 1'b0;
    else if (push && fifo_full) overflow <= 1'b1;
  end

  sync_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(16)) u_fifo (
    .clk   (clk),
    .rst   (rst),
    .wr    (push),
    .din   (shreg),
    .rd    (fifo_rd),
    .dout  (fifo_dout),
    .full  (fifo_full),
    .empty (fifo_empty),
    .count (fifo_count)
  );

  // CNV and SCK are never high together (SDO is high impedance during CNV).
  a_cnv_sck: assert property (@(posedge clk) disable iff (rst) !(adc_cnv && adc_sck));
endmodule
