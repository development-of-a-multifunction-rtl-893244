// scaler: two banks of twelve gated 32-bit counters for the neutron
// detector channels.
//
// The same twelve inputs feed both banks. Bank 0 counts while enSpinUpCnt is
// set (spin-up analysis window) and bank 1 while enSpinDnCnt is set (after the
// spin flipper has been turned on), both gates coming from the micro-timer
// action mask. Each channel is a cnt32 clocked by its input pulses, so inputs
// are counted at their own rate, independently of the system clock. `clr`
// clears all 24 counters. The USB side reads one counter at a time through
// `rd_sel` (0..11 bank 0, 16..27 bank 1); the read data is registered on the
// system clock, one clock after rd_sel.
//
// From the published design: two banks, twelve 32-bit counters each, gated by
// enSpinUpCnt/enSpinDnCnt. This design's choices: the input-clocked counter,
// the clear and the read multiplexer.
module scaler
  import nedm_pkg::*;
(
  input  logic                   clk,
  input  logic [N_CNT-1:0]       cnt_in,
  input  logic                   en_spin_up_cnt,
  input  logic                   en_spin_dn_cnt,
  input  logic                   clr,
  input  logic [4:0]             rd_sel,
  output logic [CNT_W-1:0]       rd_data
);
  logic [N_CNT-1:0][CNT_W-1:0] cnt_up, cnt_dn;

  for (genvar i = 0; i < N_CNT; i++) begin : g_ch
    cnt32 #(.W(CNT_W)) u_up (
      .pulse (cnt_in[i]), .gate (en_spin_up_cnt), .clr (clr), .count (cnt_up[i])
    );
    cnt32 #(.W(CNT_W)) u_dn (
      .pulse (cnt_in[i]), .gate (en_spin_dn_cnt), .clr (clr), .count (cnt_dn[i])
    );
  end

  always_ff @(posedge clk) begin
    if (rd_sel[3:0] >= 4'(N_CNT)) rd_data <= '0;
    else if (rd_sel[4])           rd_data <= cnt_dn[rd_sel[3:0]];
    else                          rd_data <= cnt_up[rd_sel[3:0]];
  end
endmodule
