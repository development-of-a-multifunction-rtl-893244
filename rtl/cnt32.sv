// cnt32: one gated 32-bit scaler channel.
//
// The counter is clocked by the detector pulse itself, so its counting rate
// is limited only by the flip-flop and carry-chain speed of the FPGA and not
// by the 10 MHz system clock; this is how a scaler can follow input rates of
// 100 MHz and more. Every rising edge of `pulse` increments the count while
// `gate` is high. `clr` (from the system-clock domain) clears the counter
// asynchronously. `gate` comes from the micro-timer and `count` is read in
// the system-clock domain: it is meant to be read once the gate is closed,
// when it no longer changes. The count wraps after 2^32 - 1. The width and
// the gating are those of the published design; the input-clocked
// construction and the asynchronous clear are this design's own.
module cnt32 #(
  parameter int unsigned W = 32
) (
  input  logic         pulse,
  input  logic         gate,
  input  logic         clr,
  output logic [W-1:0] count
);
  always_ff @(posedge pulse or posedge clr) begin
    if (clr)       count <= '0;
    else if (gate) count <= count + 1'b1;
  end
endmodule
