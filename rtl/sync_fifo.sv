// sync_fifo: single-clock first-in first-out buffer, used as the ADC output
// FIFO (1k x 16).
//
// Pointers are one bit wider than the address so that full and empty are told
// apart. A write when full and a read when empty are ignored (the caller
// checks `full`/`empty`). Read data is registered: `dout` holds the word
// popped by `rd` from the next clock on, as in an FPGA block-RAM FIFO.
// `count` is the number of words stored.
module sync_fifo #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr,
  input  logic [WIDTH-1:0] din,
  input  logic             rd,
  output logic [WIDTH-1:0] dout,
  output logic             full,
  output logic             empty,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             do_wr, do_rd;

  assign count = wptr - rptr;
  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign do_wr = wr && !full;
  assign do_rd = rd && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= din;
    if (do_rd) dout <= mem[rptr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (rst) count <= (AW+1)'(DEPTH));
endmodule
