// tb_scaler: self-checking test of the two-bank scaler.
//
// Each of the twelve inputs receives its own number of pulses at 100 MHz
// (10 ns period, ten times the 10 MHz system clock) in four phases: spin-up
// gate open, spin-down gate open, both gates closed, both gates open. The
// expected contents of every counter of both banks are summed in the
// testbench and compared with what the read multiplexer returns. A fifth
// phase repeats the spin-up window at 150 MHz. The clear
// input must then bring all 24 counters back to zero.
module tb_scaler;
  import nedm_pkg::*;

  logic              clk = 1'b0;
  logic [N_CNT-1:0]  cnt_in = '0;
  logic              en_up = 1'b0, en_dn = 1'b0, clr = 1'b0;
  logic [4:0]        rd_sel = '0;
  logic [CNT_W-1:0]  rd_data;
  int                checks = 0, failures = 0;
  int                exp_up [N_CNT], exp_dn [N_CNT];

  scaler dut (
    .clk, .cnt_in, .en_spin_up_cnt (en_up), .en_spin_dn_cnt (en_dn),
    .clr, .rd_sel, .rd_data
  );

  always #50 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%t %s: got %0d expected %0d", $time, what, got, exp);
    end
  endtask

  // n[i] pulses on input i, 100 MHz, all inputs in parallel
  realtime half = 5.0;   // half period of the input pulses, ns
  task automatic pulses(input int n [N_CNT]);
    int maxn = 0;
    foreach (n[i]) if (n[i] > maxn) maxn = n[i];
    for (int p = 0; p < maxn; p++) begin
      for (int i = 0; i < N_CNT; i++) cnt_in[i] = (p < n[i]);
      #(half);
      cnt_in = '0;
      #(half);
    end
  endtask

  task automatic read_all();
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < N_CNT; i++) begin
        @(negedge clk);
        rd_sel = {1'(b), 4'(i)};
        @(negedge clk);
        if (b == 0) check($sformatf("up[%0d]", i), int'(rd_data), exp_up[i]);
        else        check($sformatf("dn[%0d]", i), int'(rd_data), exp_dn[i]);
      end
  endtask

  initial begin
    int n [N_CNT];
    @(negedge clk); clr = 1'b1;
    @(negedge clk); clr = 1'b0;
    foreach (exp_up[i]) begin exp_up[i] = 0; exp_dn[i] = 0; end

    // phase 1: spin-up window
    en_up = 1'b1; #20;
    foreach (n[i]) begin n[i] = 10 + 7 * i + ($urandom % 5); exp_up[i] += n[i]; end
    pulses(n);
    #20 en_up = 1'b0; #20;
    // phase 2: spin-down window
    en_dn = 1'b1; #20;
    foreach (n[i]) begin n[i] = 200 - 9 * i + ($urandom % 5); exp_dn[i] += n[i]; end
    pulses(n);
    #20 en_dn = 1'b0; #20;
    // phase 3: gates closed, nothing is counted
    foreach (n[i]) n[i] = 33;
    pulses(n);
    #20;
    // phase 4: both gates open
    en_up = 1'b1; en_dn = 1'b1; #20;
    foreach (n[i]) begin n[i] = 5 + i; exp_up[i] += n[i]; exp_dn[i] += n[i]; end
    pulses(n);
    #20 en_up = 1'b0; en_dn = 1'b0;
    // phase 5: spin-up window at 150 MHz (6.67 ns period)
    half = 10.0 / 3.0;
    en_up = 1'b1; #20;
    foreach (n[i]) begin n[i] = 50 + 3 * i; exp_up[i] += n[i]; end
    pulses(n);
    #20 en_up = 1'b0;
    half = 5.0;

    read_all();
    // unused select codes read zero
    @(negedge clk); rd_sel = 5'd13;
    @(negedge clk); check("unused select", int'(rd_data), 0);

    // clear
    @(negedge clk); clr = 1'b1;
    @(negedge clk); clr = 1'b0;
    foreach (exp_up[i]) begin exp_up[i] = 0; exp_dn[i] = 0; end
    read_all();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
