// ad7685_model: behavioural model of the AD7685 16-bit SAR ADC in its 3-wire
// mode without busy indicator (SDI tied high), for simulation only.
//
// A rising edge of CNV starts a conversion of the next value of a fixed test
// sequence, value(k) = (k * 16'h1357) ^ 16'hA5C3 for the k-th conversion. When
// CNV falls, the MSB is put on SDO, and each falling SCK edge shifts the next
// bit out. The model counts conversions, remembers the time of the last CNV
// rising edge and flags `early_read` if CNV falls before the 2.2 us maximum
// conversion time.
module ad7685_model (
  input  logic cnv,
  input  logic sck,
  output logic sdo
);
  int          n_conv = 0;
  realtime     t_last_start = 0.0, t_prev_start = 0.0;
  logic        early_read = 1'b0;
  logic [15:0] shreg = '0;

  function automatic logic [15:0] value(input int k);
    return 16'(k * 16'h1357) ^ 16'hA5C3;
  endfunction

  always @(posedge cnv) begin
    t_prev_start = t_last_start;
    t_last_start = $realtime;
    shreg        = value(n_conv);
    n_conv++;
  end

  always @(negedge cnv) begin
    if (n_conv > 0 && $realtime - t_last_start < 2200.0) early_read = 1'b1;
    sdo = shreg[15];
  end

  always @(negedge sck) begin
    shreg = {shreg[14:0], 1'b0};
    sdo   = shreg[15];
  end

  initial sdo = 1'b0;
endmodule
