// tb_tx_upsampler - self-checking test of the BPSK upsampler.
//
// Bits come from a random array in the testbench, served through the same
// combinational read interface the sequence buffer offers. For U = 1, 2, 4
// it starts a burst and compares every output sample with the reference
// waveform of tb_ref_pkg, checks that the first sample appears one cycle
// after start, that tx_active lasts exactly L*U cycles, that last marks
// the final sample, and that cancel stops a burst at once.
module tb_tx_upsampler;
  import rng_pkg::*;
  import tb_ref_pkg::*;

  localparam int L   = 64;
  localparam int AMP = 8192;

  logic clk = 0, rst_n = 0, start = 0, cancel = 0;
  up_log2_t up_log2 = 0;
  logic [$clog2(L)-1:0] sym;
  logic bit_cur, bit_nxt, nxt_valid;
  iq_t tx;
  logic tx_active, last;
  logic [MAXL-1:0] bits;

  tx_upsampler #(.L(L), .MAXU(4), .AMP(AMP)) dut (.*);

  assign bit_cur   = bits[sym];
  assign nxt_valid = (int'(sym) < L - 1);
  assign bit_nxt   = nxt_valid ? bits[int'(sym) + 1] : 1'b0;

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    bits = '0;
    for (int w = 0; w < L / 32; w++) bits[32*w +: 32] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int lg = 0; lg <= 2; lg++) begin
      int u, n_active, n_last;
      u = 1 << lg;
      up_log2 = up_log2_t'(lg);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      n_active = 0;
      n_last = 0;
      // the first sample is on tx now, one cycle after start
      for (int n = 0; n < L * u + 3; n++) begin
        if (n < L * u) begin
          check(tx_active, $sformatf("U=%0d n=%0d: tx_active low", u, n));
          check(int'(tx.i) == ref_up_sample(bits, L, u, n, AMP) && tx.q == 0,
                $sformatf("U=%0d n=%0d: got %0d expected %0d", u, n, tx.i,
                          ref_up_sample(bits, L, u, n, AMP)));
          check(last == (n == L * u - 1), $sformatf("U=%0d n=%0d: last=%0d", u, n, last));
        end else begin
          check(!tx_active && tx.i == 0, $sformatf("U=%0d: still active after %0d samples", u, n));
        end
        @(negedge clk);
      end
    end
    // cancel in the middle of a burst
    up_log2 = 2;
    start = 1;
    @(negedge clk);
    start = 0;
    repeat (10) @(negedge clk);
    cancel = 1;
    @(negedge clk);
    cancel = 0;
    check(!tx_active && tx.i == 0, "cancel did not stop the burst");
    repeat (5) @(negedge clk);
    check(!tx_active, "burst resumed after cancel");
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
