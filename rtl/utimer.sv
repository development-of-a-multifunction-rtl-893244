// utimer: the micro-timer that sequences one measurement cycle of the nEDM
// experiment.
//
// The table holds up to 16 steps. Step k uses two 32-bit words of a 512x32
// dual-port block RAM: word 2k is the step duration in microseconds
// (1 .. 2^32-1) and word 2k+1 is the 32-bit action mask driven on the outputs
// for the whole step, one bit per action. The USB side fills the table on
// port A while the timer is idle; the timer reads it on port B.
//
// A two-state FSM (IDLE, RUN) controls execution. A rising edge of `run`
// starts the table at step 0; steps follow in order until step 15 has ended
// or a step with duration 0 is met (0 is outside the legal duration range and
// marks the end of a shorter table). Dropping `run` aborts at once. In IDLE the
// action mask is all zero.
//
// Timing: one microsecond is TICKS_PER_US clocks (10 at the 10 MHz atomic
// clock). A step lasts exactly duration*TICKS_PER_US clocks. The parameters of
// the next step are read from the RAM during the last three clocks of the
// current one (address of the duration, address of the mask, then both
// registered), so the new mask appears with no gap. The first step starts
// three clocks after the rising edge of `run`. The read pointer is
// {step, word}; `stage` shows its four most significant bits for the step
// being executed and is used for readout and external synchronisation.
//
// From the published design: 16 steps, 32-bit durations in 1 us steps, 32-bit
// masks, the 512x32 RAM, the two-state FSM started by run, stage = pointer
// MSBs. This design's choices: the word order within a step, the zero-duration
// terminator, the edge start and level abort of run, the prefetch timing.
module utimer
  import nedm_pkg::*;
#(
  parameter int unsigned TICKS_PER_US = 10,
  parameter int unsigned RAM_DEPTH    = 512,
  localparam int unsigned RAW         = $clog2(RAM_DEPTH)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              run,
  // USB port of the table RAM
  input  logic              ram_we,
  input  logic [RAW-1:0]    ram_addr,
  input  logic [31:0]       ram_wdata,
  output logic [31:0]       ram_rdata,
  // outputs
  output logic [ACT_W-1:0]  actions,   // action mask of the current step
  output logic [3:0]        stage,     // current step number
  output logic              busy       // FSM in RUN
);
  localparam int unsigned TW = $clog2(TICKS_PER_US + 1);
  localparam int unsigned CW = DUR_W + TW;   // cycles left in the step

  if (TICKS_PER_US < 3) begin : g_bad_ticks
    $error("utimer: TICKS_PER_US must be at least 3 for the step prefetch");
  end

  typedef enum logic {IDLE, RUN} state_t;
  state_t state;

  logic [CW-1:0]    cyc_left;
  logic [3:0]       fetch_step;  // step whose parameters are read next
  logic             final_step;  // the step being executed is step 15
  logic [DUR_W-1:0] nxt_dur;
  logic             run_q;
  logic             word_sel;
  logic [RAW-1:0]   b_addr;
  logic [31:0]      b_rdata;

  // Read pointer: {step, word}; upper RAM bits unused by the table.
  assign word_sel = (cyc_left == CW'(2));
  assign b_addr   = RAW'({fetch_step, word_sel});

  dpram #(.DEPTH(RAM_DEPTH), .WIDTH(32)) u_ram (
    .clk     (clk),
    .a_we    (ram_we),
    .a_addr  (ram_addr),
    .a_wdata (ram_wdata),
    .a_rdata (ram_rdata),
    .b_addr  (b_addr),
    .b_rdata (b_rdata)
  );

  assign busy = (state == RUN);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= IDLE;
      run_q      <= 1'b0;
      cyc_left   <= '0;
      fetch_step <= '0;
      final_step <= 1'b0;
      nxt_dur    <= '0;
      actions    <= '0;
      stage      <= '0;
    end else begin
      run_q <= run;
      unique case (state)
        IDLE: begin
          actions <= '0;
          if (run && !run_q) begin
            state      <= RUN;
            fetch_step <= '0;
            final_step <= 1'b0;
            cyc_left   <= CW'(3);   // three-clock fetch of step 0
          end
        end
        RUN: begin
          if (!run) begin
            state   <= IDLE;
            actions <= '0;
          end else begin
            cyc_left <= cyc_left - 1'b1;
            if (cyc_left == CW'(2)) nxt_dur <= b_rdata;
            if (cyc_left == CW'(1)) begin
              // step boundary: b_rdata now holds the next mask
              if (final_step || nxt_dur == '0) begin
                state   <= IDLE;
                actions <= '0;
              end else begin
                actions    <= b_rdata;
                stage      <= fetch_step;
                cyc_left   <= CW'(nxt_dur) * CW'(TICKS_PER_US);
                final_step <= (fetch_step == 4'd15);
                fetch_step <= fetch_step + 1'b1;
              end
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // The action mask is all zero whenever the timer is idle.
  a_idle_quiet: assert property (@(posedge clk) disable iff (rst)
    (state == IDLE) |=> (actions == '0) || (state == RUN));
  // A running step never has zero cycles left.
  a_cyc_nonzero: assert property (@(posedge clk) disable iff (rst)
    (state == RUN) |-> (cyc_left != '0));
endmodule
