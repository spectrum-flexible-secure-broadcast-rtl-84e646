// tb_req_detector - self-checking test of the request detector at its full
// size (L = 512, L0 = 256, alpha = 50, U up to 4).
//
// For U = 1, 2, 4 and for a clean and a 0 dB SNR channel it sends noise, a
// request built from a random pattern, and noise again, and checks that the
// trigger fires exactly once, DET cycles after the first sample of the last
// symbol arrived (DET = (MAXU-1) + 5 + Q_W + L0, counted from the stage list
// of the design description: history, prefilter centre, prefilter,
// correlator, power, divider, candidate age, trigger). It also sends a
// request built from a different pattern and checks that nothing fires, and
// that en = 0 suppresses the trigger.
module tb_req_detector;
  import rng_pkg::*;
  import tb_ref_pkg::*;

  localparam int L    = 512;
  localparam int L0   = 256;
  localparam int MAXU = 4;
  localparam int QW   = 9 + METRIC_FRAC + 1;
  localparam int DET  = (MAXU - 1) + 5 + QW + L0;
  localparam int AMP  = 8192;

  logic clk = 0, rst_n = 0, clr = 0, en = 1;
  up_log2_t up_log2 = 0;
  logic [L-1:0] pattern;
  iq_t rx;
  logic trig;
  logic [$clog2(L)+METRIC_FRAC:0] peak_metric;

  req_detector dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // triggers seen, with their cycles
  int trig_cnt = 0, trig_cyc = -1;
  always @(negedge clk) if (rst_n && trig) begin
    trig_cnt++;
    trig_cyc = cyc;
  end

  task automatic send(input logic [L-1:0] bits, input int u, input int namp,
                      input int pre, output int m_cyc);
    for (int k = 0; k < pre; k++) begin
      @(negedge clk);
      rx.i = 16'(noise(namp));
      rx.q = 16'(noise(namp));
    end
    for (int n = 0; n < L * u; n++) begin
      @(negedge clk);
      rx.i = 16'(ref_up_sample(bits, L, u, n, AMP) + noise(namp));
      rx.q = 16'(noise(namp));
      if (n == (L - 1) * u) m_cyc = cyc;
    end
    for (int k = 0; k < DET + 300; k++) begin
      @(negedge clk);
      rx.i = 16'(noise(namp));
      rx.q = 16'(noise(namp));
    end
  endtask

  task automatic restart(input int lg);
    @(negedge clk);
    up_log2 = up_log2_t'(lg);
    clr = 1;
    @(negedge clk);
    clr = 0;
    trig_cnt = 0;
    trig_cyc = -1;
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int m_cyc;
    logic [L-1:0] other;
    rx = '0;
    for (int w = 0; w < L / 32; w++) pattern[32*w +: 32] = $urandom;
    for (int w = 0; w < L / 32; w++) other[32*w +: 32] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int lg = 0; lg <= 2; lg++) begin
      for (int s = 0; s < 2; s++) begin
        // s = 0: light noise; s = 1: noise power equal to the signal (0 dB)
        int namp;
        namp = (s == 0) ? 200 : 10000;
        restart(lg);
        send(pattern, 1 << lg, namp, 400 + int'($urandom_range(63)), m_cyc);
        check(trig_cnt == 1, $sformatf("U=%0d snr%0d: %0d triggers", 1 << lg, s, trig_cnt));
        check(trig_cyc == m_cyc + DET,
              $sformatf("U=%0d snr%0d: trigger at %0d, expected %0d", 1 << lg, s, trig_cyc, m_cyc + DET));
        check(peak_metric > 18'((L << METRIC_FRAC) / 4),
              $sformatf("U=%0d snr%0d: peak metric %0d too low", 1 << lg, s, peak_metric));
        $display("U=%0d noise=%0d trig=%0d at %0d (expected %0d) metric=%0d",
                 1 << lg, namp, trig_cnt, trig_cyc, m_cyc + DET, peak_metric);
      end
      // a request of another epoch or initiator must not trigger
      restart(lg);
      send(other, 1 << lg, 200, 400, m_cyc);
      check(trig_cnt == 0, $sformatf("U=%0d: wrong pattern triggered %0d times", 1 << lg, trig_cnt));
    end
    // en = 0 suppresses the trigger
    restart(0);
    en = 0;
    send(pattern, 1, 200, 400, m_cyc);
    check(trig_cnt == 0, "trigger while en = 0");
    en = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
