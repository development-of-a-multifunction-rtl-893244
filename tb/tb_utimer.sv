// tb_utimer: self-checking test of the micro-timer.
//
// A reference trace is computed in the testbench from the table it writes:
// after the clock edge that sees `run` rise, the FSM spends three clocks
// fetching step 0, then step k drives mask k and stage k for exactly
// duration_k * 10 clocks (1 us at 10 MHz), and after the last step the
// outputs return to zero and `busy` falls. The DUT is compared with this
// trace on every clock. Three tables are run: five steps closed by a
// zero-duration terminator, a full 16-step table (one step longer than
// 2^16 us, to exercise the upper duration bits), and a run aborted by
// dropping `run`. It also checks that keeping `run` high after the end does
// not restart the table.
module tb_utimer;
  import nedm_pkg::*;

  localparam int TICKS = 10;

  logic        clk = 1'b0, rst = 1'b1, run = 1'b0;
  logic        ram_we = 1'b0;
  logic [8:0]  ram_addr = '0;
  logic [31:0] ram_wdata = '0, ram_rdata;
  logic [31:0] actions;
  logic [3:0]  stage;
  logic        busy;
  int          checks = 0, failures = 0;

  logic [31:0] dur  [16];
  logic [31:0] mask [16];

  utimer dut (
    .clk, .rst, .run, .ram_we, .ram_addr, .ram_wdata, .ram_rdata,
    .actions, .stage, .busy
  );

  always #50 clk = ~clk;

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_word(input int addr, input logic [31:0] data);
    @(negedge clk);
    ram_we = 1'b1; ram_addr = 9'(addr); ram_wdata = data;
    @(negedge clk);
    ram_we = 1'b0;
  endtask

  task automatic load_table(input int n);
    for (int k = 0; k < 16; k++) begin
      write_word(2*k,     (k < n) ? dur[k] : 32'd0);
      write_word(2*k + 1, mask[k]);
    end
  endtask

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("%t %s: got %h expected %h", $time, what, got, exp);
    end
  endtask

  // Run the loaded table (n active steps) against the reference trace.
  task automatic run_and_compare(input int n);
    int total, c, k, acc;
    logic [31:0] exp_mask;
    logic [3:0]  exp_stage;
    logic        exp_busy;
    total = 3;
    for (int i = 0; i < n; i++) total += int'(dur[i]) * TICKS;
    @(negedge clk);
    run = 1'b1;
    @(posedge clk);               // E0: the edge that sees run rise
    exp_stage = stage;
    for (c = 0; c < total + 30; c++) begin
      @(negedge clk);
      exp_busy = (c < total);
      exp_mask = '0;
      if (c >= 3 && c < total) begin
        acc = 3;
        for (k = 0; k < n; k++) begin
          if (c < acc + int'(dur[k]) * TICKS) break;
          acc += int'(dur[k]) * TICKS;
        end
        exp_mask  = mask[k];
        exp_stage = 4'(k);
      end
      check("actions", actions, exp_mask);
      check("busy", 32'(busy), 32'(exp_busy));
      if (c >= 3 && c < total) check("stage", 32'(stage), 32'(exp_stage));
      @(posedge clk);
    end
    // run still high: no restart without a new rising edge
    check("no restart", 32'(busy), 32'd0);
    @(negedge clk);
    run = 1'b0;
  endtask

  initial begin
    for (int k = 0; k < 16; k++) begin
      dur[k]  = 32'(1 + ($urandom % 6));
      mask[k] = $urandom | 32'h1;   // never all-zero
    end
    repeat (3) @(posedge clk);
    rst = 1'b0;

    // 1) five steps, then the zero-duration terminator
    load_table(5);
    // read-back through the USB port
    @(negedge clk); ram_addr = 9'd3;
    @(negedge clk); check("ram readback", ram_rdata, mask[1]);
    run_and_compare(5);

    // 2) all sixteen steps, one of them longer than 2^16 us
    dur[7] = 32'd70_001;
    load_table(16);
    run_and_compare(16);

    // 3) abort by dropping run
    dur[7] = 32'd3;
    load_table(16);
    @(negedge clk); run = 1'b1;
    repeat (40) @(negedge clk);
    check("busy before abort", 32'(busy), 32'd1);
    run = 1'b0;
    @(negedge clk);
    check("abort actions", actions, 32'd0);
    check("abort busy", 32'(busy), 32'd0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
