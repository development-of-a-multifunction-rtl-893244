// freq_divider: divides the 10 MHz atomic clock by 20 to give the 500 kHz
// reference clock of the AD9852 DDS pairs.
//
// As published, the division is done by a 0..9 counter: each time it wraps
// from 9 back to 0 the output flip-flop toggles, so the output is high for
// 10 input cycles and low for 10, a 50% duty cycle at clk/20. HALF_DIV sets
// the counter length (the published value is 10). The output is registered,
// so it changes one clock after the counter wraps. The synchronous,
// active-high reset (output low, counter 0) is this design's choice.
module freq_divider #(
  parameter int unsigned HALF_DIV = 10
) (
  input  logic clk,
  input  logic rst,
  output logic clk_out
);
  localparam int unsigned CW = (HALF_DIV > 1) ? $clog2(HALF_DIV) : 1;

  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt     <= '0;
      clk_out <= 1'b0;
    end else if (cnt == CW'(HALF_DIV - 1)) begin
      cnt     <= '0;
      clk_out <= ~clk_out;
    end else begin
      cnt     <= cnt + 1'b1;
    end
  end
endmodule
