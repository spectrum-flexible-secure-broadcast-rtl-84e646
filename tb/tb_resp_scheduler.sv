// tb_resp_scheduler - self-checking test of the response scheduler.
//
// The detector and the upsampler are replaced by testbench models: a trigger
// pulse DET_LAT cycles after a chosen peak cycle M, and a burst of LEN
// samples whose first sample follows tx_start by one cycle and whose last
// sample is flagged by tx_last. The test checks, from the timing contract:
//   first sample of response 0 at M + T_W,0,
//   first sample of response n at E_{n-1} + 1 + T_W,n,
// the number of responses and sessions, that a session needs an epoch start
// while enabled and synced, the late flag for a too-short T_W,0, and that an
// epoch start in the middle of a batch aborts it (tx cancelled, counted,
// detector re-armed).
module tb_resp_scheduler;
  import rng_pkg::*;

  localparam int NB  = 4;
  localparam int DL  = 20;   // detector latency
  localparam int LEN = 30;   // burst length

  logic clk = 0, rst_n = 0, enable = 0, synced = 0, epoch_start = 0, det_trig = 0;
  logic det_clr, det_en, tx_start, tx_abort, tx_last, late;
  logic [$clog2(NB)-1:0] resp_idx;
  logic [TW_W-1:0] tw;
  sched_state_t state;
  logic [15:0] sessions, aborts;
  logic [TW_W-1:0] tw_tab [NB];

  resp_scheduler #(.NB(NB), .DET_LAT(DL)) dut (.*);
  assign tw = tw_tab[resp_idx];

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // burst model and recorder
  int first_smp [$];
  int last_smp  [$];
  int burst_left = 0;
  int late_seen = 0;
  logic last_r = 0;
  always @(negedge clk) begin
    last_r = 0;
    if (rst_n) begin
      if (late) late_seen++;
      if (tx_abort) burst_left = 0;
      if (burst_left > 0) begin
        burst_left--;
        if (burst_left == 0) begin
          last_smp.push_back(cyc);
          last_r = 1;
        end
      end
      if (tx_start) begin
        burst_left = LEN;
        first_smp.push_back(cyc + 1);
      end
    end
  end
  assign tx_last = last_r;

  task automatic new_epoch();
    @(negedge clk);
    epoch_start = 1;
    @(negedge clk);
    epoch_start = 0;
  endtask

  // a trigger that reports a peak at cycle m
  task automatic trigger_at(input int m);
    while (cyc < m + DL) @(negedge clk);
    det_trig = 1;
    @(negedge clk);
    det_trig = 0;
  endtask

  initial begin
    int m, s0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // not synced: an epoch start must not arm
    enable = 1;
    new_epoch();
    check(state == S_IDLE && !det_en, "armed while not synced");
    synced = 1;
    new_epoch();
    check(state == S_SCAN && det_en, "not armed after epoch start");

    // session 1: normal batch
    tw_tab[0] = 40; tw_tab[1] = 5; tw_tab[2] = 17; tw_tab[3] = 1;
    first_smp.delete(); last_smp.delete();
    m = cyc + 10;
    trigger_at(m);
    while (state != S_DONE && cyc < m + 1000) @(negedge clk);
    check(state == S_DONE, "session 1 did not complete");
    check(first_smp.size() == NB && last_smp.size() == NB,
          $sformatf("session 1: %0d responses", first_smp.size()));
    if (first_smp.size() == NB && last_smp.size() == NB) begin
      check(first_smp[0] == m + 40, $sformatf("resp 0 at %0d, expected %0d", first_smp[0], m + 40));
      for (int n = 1; n < NB; n++)
        check(first_smp[n] == last_smp[n-1] + 1 + int'(tw_tab[n]),
              $sformatf("resp %0d at %0d, expected %0d", n, first_smp[n], last_smp[n-1] + 1 + int'(tw_tab[n])));
      for (int n = 0; n < NB; n++)
        check(last_smp[n] == first_smp[n] + LEN - 1, "burst length");
    end
    check(sessions == 1 && aborts == 0 && late_seen == 0, "counters after session 1");
    repeat (20) @(negedge clk);
    check(first_smp.size() == NB, "extra response after DONE");

    // session 2: T_W,0 shorter than the detector latency -> late, sent at once
    new_epoch();
    tw_tab[0] = 5;
    first_smp.delete(); last_smp.delete();
    m = cyc + 10;
    trigger_at(m);
    while (state != S_DONE && cyc < m + 1000) @(negedge clk);
    check(late_seen == 1, $sformatf("late seen %0d times", late_seen));
    check(first_smp.size() > 0 && first_smp[0] == m + DL + 2,
          "late response 0 not sent as soon as possible");
    check(sessions == 2, "session 2 did not complete");

    // session 3: epoch boundary during response 1 -> abort
    new_epoch();
    tw_tab[0] = 40;
    first_smp.delete(); last_smp.delete();
    m = cyc + 10;
    trigger_at(m);
    while (first_smp.size() < 2) @(negedge clk);
    repeat (5) @(negedge clk);
    check(state == S_SEND, "not sending before abort");
    @(negedge clk);
    epoch_start = 1;
    #1;
    check(tx_abort && det_clr, "epoch start did not cancel the burst / clear the detector");
    @(negedge clk);
    epoch_start = 0;
    check(state == S_SCAN && aborts == 1 && sessions == 2, "state after abort");
    repeat (100) @(negedge clk);
    check(first_smp.size() == 2, "responses after abort");
    // epoch boundary while waiting -> abort too
    m = cyc + 5;
    trigger_at(m);
    repeat (3) @(negedge clk);
    check(state == S_WAIT, "not waiting");
    new_epoch();
    check(aborts == 2 && state == S_SCAN, "abort while waiting");
    // disable: the next epoch does not arm
    enable = 0;
    new_epoch();
    check(state == S_IDLE, "armed while disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
