// tb_reflector_top - end-to-end test of the reflector at its full default
// size (L = 512, |B| = 10, L0 = 256, alpha = 50, MAXU = 4, 1 s epochs).
//
// The testbench plays the host and the initiator. Per session it writes a
// fresh random request pattern, |B| random response sequences and waiting
// periods over the host bus, delivers a SYNC (epoch load), and sends the
// request on rx, upsampled by U and with added noise. It then checks the
// transmitted batch sample by sample against the reference waveform, and
// the timing contract: response 0 starts T_W,0 cycles after the request's
// peak sample M, response n starts T_W,n cycles after response n-1 ended.
// Sessions:
//   A  U = 1, clean channel, full batch
//   B  U = 4 (mode switch), 0 dB SNR, full batch
//   C  U = 2, request of a wrong pattern: must be ignored
//   D  U = 2, T_W,0 below the detector latency (late), then a SYNC in the
//      middle of response 1 (epoch boundary: batch aborted)
// Each mechanism (detection, complete batch, each U, rejection, late,
// abort) is counted and must occur at least once.
module tb_reflector_top;
  import rng_pkg::*;
  import tb_ref_pkg::*;

  localparam int L   = 512;
  localparam int NB  = 10;
  localparam int AMP = 8192;
  localparam int DET = (MAX_UP - 1) + 5 + (9 + METRIC_FRAC + 1) + PEAK_WIN;  // 282
  localparam int W   = 1500;   // waiting window used by this test, in samples
  localparam int CW  = $clog2(EPOCH_CYCLES);

  logic clk = 0, rst_n = 0, enable = 0, sync_load = 0;
  up_log2_t up_log2 = 0;
  host_wr_t host_wr;
  logic [EPOCH_W-1:0] sync_epoch = 0, epoch;
  logic [CW-1:0] sync_phase = 0, peak_phase;
  iq_t rx, tx;
  logic tx_active, synced;
  sched_state_t state;
  logic [15:0] sessions, aborts, late_count, det_count;
  logic [$clog2(L)+METRIC_FRAC:0] peak_metric;

  reflector_top dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL: %s", what);
    end
  endtask

  // ---- session data -----------------------------------------------------------
  logic [MAXL-1:0] req_pat, resp_pat [NB];
  int tw_tab [NB];
  int sess_u = 1;
  int noise_amp = 100;

  // ---- transmit monitor -------------------------------------------------------
  int burst_first [$];
  int burst_last  [$];
  int bidx = -1, bpos = 0;
  logic act_d = 0;
  int sample_errs = 0;
  always @(negedge clk) begin
    if (rst_n) begin
      if (tx_active && !act_d) begin
        bidx++;
        bpos = 0;
        burst_first.push_back(cyc);
      end
      if (tx_active) begin
        if (bidx < NB && (int'(tx.i) != ref_up_sample(resp_pat[bidx], L, sess_u, bpos, AMP) || tx.q != 0))
          sample_errs++;
        bpos++;
      end
      if (!tx_active && act_d) burst_last.push_back(cyc - 1);
      act_d = tx_active;
    end
  end

  // rx: noise unless a request is being sent
  logic sending = 0;
  always @(negedge clk) if (!sending) begin
    rx.i = 16'(noise(noise_amp));
    rx.q = 16'(noise(noise_amp));
  end

  // ---- mechanism counters -----------------------------------------------------
  int n_detect = 0, n_batch = 0, n_reject = 0, n_late = 0, n_abort = 0;
  int n_mode [3] = '{0, 0, 0};

  // ---- host and initiator tasks -----------------------------------------------
  task automatic host_write(input int region, input int off, input logic [31:0] d);
    @(negedge clk);
    host_wr.en = 1;
    host_wr.addr = HADDR_W'((region << (HADDR_W - 2)) | off);
    host_wr.data = d;
    @(negedge clk);
    host_wr.en = 0;
  endtask

  task automatic load_session(input int tw0);
    for (int w = 0; w < L / 32; w++) begin
      req_pat[32*w +: 32] = $urandom;
      host_write(0, w, req_pat[32*w +: 32]);
    end
    for (int n = 0; n < NB; n++)
      for (int w = 0; w < L / 32; w++) begin
        resp_pat[n][32*w +: 32] = $urandom;
        host_write(1, n * (L / 32) + w, resp_pat[n][32*w +: 32]);
      end
    for (int n = 0; n < NB; n++) begin
      tw_tab[n] = (n == 0) ? tw0 : 1 + int'($urandom_range(W - 2));
      host_write(2, n, 32'(tw_tab[n]));
    end
  endtask

  int sync_cyc = 0;
  task automatic do_sync(input int ep);
    @(negedge clk);
    sync_cyc = cyc;
    sync_epoch = EPOCH_W'(ep);
    sync_phase = CW'(0);
    sync_load = 1;
    @(negedge clk);
    sync_load = 0;
  endtask

  // Sends the request (the given bits) upsampled by sess_u; returns M.
  task automatic send_req(input logic [MAXL-1:0] bits, output int m);
    repeat (50) @(negedge clk);
    sending = 1;
    for (int n = 0; n < L * sess_u; n++) begin
      rx.i = 16'(ref_up_sample(bits, L, sess_u, n, AMP) + noise(noise_amp));
      rx.q = 16'(noise(noise_amp));
      if (n == (L - 1) * sess_u) m = cyc;
      @(negedge clk);
    end
    sending = 0;
  endtask

  task automatic check_batch(input int m, input int nresp, input string tag);
    check(burst_first.size() == nresp, $sformatf("%s: %0d responses, expected %0d", tag, burst_first.size(), nresp));
    if (burst_first.size() >= 1)
      check(burst_first[0] == m + tw_tab[0],
            $sformatf("%s: response 0 at %0d, expected %0d", tag, burst_first[0], m + tw_tab[0]));
    for (int n = 1; n < burst_first.size() && n < burst_last.size() + 1; n++)
      check(burst_first[n] == burst_last[n-1] + 1 + tw_tab[n],
            $sformatf("%s: response %0d at %0d, expected %0d", tag, n, burst_first[n], burst_last[n-1] + 1 + tw_tab[n]));
    for (int n = 0; n < burst_last.size(); n++)
      check(burst_last[n] - burst_first[n] + 1 == L * sess_u || (n == burst_last.size() - 1 && nresp < NB),
            $sformatf("%s: response %0d length %0d", tag, n, burst_last[n] - burst_first[n] + 1));
    check(sample_errs == 0, $sformatf("%s: %0d wrong samples", tag, sample_errs));
  endtask

  task automatic start_session(input int lg, input int tw0, input int ep);
    wait (state == S_DONE || state == S_IDLE || state == S_SCAN);
    up_log2 = up_log2_t'(lg);
    sess_u = 1 << lg;
    load_session(tw0);
    burst_first.delete();
    burst_last.delete();
    bidx = -1;
    sample_errs = 0;
    do_sync(ep);
  endtask

  initial begin
    int m, d0, s0, l0, a0;
    host_wr = '0;
    rx = '0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    enable = 1;

    // ---- A: U = 1, clean -----------------------------------------------------
    start_session(0, DET + 2 + int'($urandom_range(W - DET - 3)), 100);
    repeat (2) @(negedge clk);
    check(synced && epoch == 100 && state == S_SCAN, "A: not armed after SYNC");
    d0 = det_count;
    send_req(req_pat, m);
    wait (state == S_DONE);
    repeat (5) @(negedge clk);
    check(det_count == d0 + 1, "A: detection count");
    // the epoch's phase 0 is the cycle after the SYNC load
    check(int'(peak_phase) == m - sync_cyc - 1, $sformatf("A: peak phase %0d, expected %0d", peak_phase, m - sync_cyc - 1));
    check_batch(m, NB, "A");
    check(sessions == 1, "A: session count");
    if (det_count == d0 + 1) n_detect++;
    if (sessions == 1 && sample_errs == 0) begin n_batch++; n_mode[0]++; end

    // ---- B: U = 4, 0 dB SNR ----------------------------------------------------
    noise_amp = 10000;
    start_session(2, DET + 2 + int'($urandom_range(W - DET - 3)), 101);
    send_req(req_pat, m);
    wait (state == S_DONE);
    repeat (5) @(negedge clk);
    check_batch(m, NB, "B");
    check(sessions == 2, "B: session count");
    if (sessions == 2 && sample_errs == 0) begin n_batch++; n_mode[2]++; n_detect++; end
    noise_amp = 100;

    // ---- C: U = 2, wrong request ---------------------------------------------
    start_session(1, DET + 2, 102);
    begin
      logic [MAXL-1:0] other;
      for (int w = 0; w < L / 32; w++) other[32*w +: 32] = $urandom;
      d0 = det_count;
      send_req(other, m);
      repeat (DET + 2000) @(negedge clk);
      check(det_count == d0 && state == S_SCAN && burst_first.size() == 0, "C: reacted to a wrong request");
      if (det_count == d0 && burst_first.size() == 0) n_reject++;
    end

    // ---- D: U = 2, late response 0, then abort by a new epoch ----------------
    start_session(1, 20, 103);
    l0 = late_count;
    a0 = aborts;
    s0 = sessions;
    send_req(req_pat, m);
    wait (burst_first.size() == 2);
    repeat (100) @(negedge clk);
    check(late_count == l0 + 1, "D: late not flagged");
    check(burst_first[0] == m + DET + 2, $sformatf("D: late response 0 at %0d, expected %0d", burst_first[0], m + DET + 2));
    if (late_count == l0 + 1) n_late++;
    n_mode[1] += (sample_errs == 0);
    do_sync(104);
    repeat (10) @(negedge clk);
    check(aborts == a0 + 1 && sessions == s0 && !tx_active && state == S_SCAN, "D: abort");
    if (aborts == a0 + 1) n_abort++;
    repeat (3000) @(negedge clk);
    check(burst_first.size() == 2, "D: responses after abort");
    check(sample_errs == 0, "D: wrong samples");

    // ---- mechanisms ------------------------------------------------------------
    $display("mechanisms: detect=%0d batch=%0d reject=%0d late=%0d abort=%0d U1=%0d U2=%0d U4=%0d",
             n_detect, n_batch, n_reject, n_late, n_abort, n_mode[0], n_mode[1], n_mode[2]);
    check(n_detect > 0, "no detection happened");
    check(n_batch > 0, "no complete batch happened");
    check(n_reject > 0, "no rejection happened");
    check(n_late > 0, "no late response happened");
    check(n_abort > 0, "no abort happened");
    for (int k = 0; k < 3; k++) check(n_mode[k] > 0, $sformatf("upsampling mode %0d never ran", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
