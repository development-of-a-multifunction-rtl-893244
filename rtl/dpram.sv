// dpram: simple dual-port block RAM used for the micro-timer table and the
// DDS parameter memories.
//
// Port A (USB side) reads and writes; port B (firmware side) only reads. Both
// ports are synchronous: read data appears one clock after the address, as in
// an FPGA block RAM. When port A writes the word port B reads in the same
// cycle, port B returns the old contents. The memory is not reset; it is
// filled by the USB micro-controller before use.
module dpram #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  // port A: read/write
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port B: read only
  input  logic [AW-1:0]    b_addr,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we) mem[a_addr] <= a_wdata;
    a_rdata <= mem[a_addr];
    b_rdata <= mem[b_addr];
  end
endmodule
