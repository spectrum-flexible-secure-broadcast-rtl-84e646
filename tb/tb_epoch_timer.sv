// tb_epoch_timer - self-checking test of the epoch timer with a short epoch.
//
// Checks that the epoch index advances every EPOCH_CYC cycles with a
// one-cycle epoch_start in the first cycle of each epoch, that synced is low
// until the first SYNC, and that sync_load sets the epoch and the phase and
// restarts the count from there.
module tb_epoch_timer;
  import rng_pkg::*;

  localparam int EC = 100;

  logic clk = 0, rst_n = 0, sync_load = 0;
  logic [EPOCH_W-1:0] sync_epoch = 0, epoch;
  logic [$clog2(EC)-1:0] sync_phase = 0, phase;
  logic epoch_start, synced;

  epoch_timer #(.EPOCH_CYC(EC)) dut (.*);

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
    int starts;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(!synced, "synced before any SYNC");
    // free running: count starts over 3.5 epochs
    starts = 0;
    for (int c = 0; c < 350; c++) begin
      @(negedge clk);
      // the count after reset: cycle c+1 after release has phase (c+1) mod EC
      check(int'(phase) == (c + 1) % EC, $sformatf("phase %0d at step %0d", phase, c));
      check(int'(epoch) == (c + 1) / EC, $sformatf("epoch %0d at step %0d", epoch, c));
      check(epoch_start == ((c + 1) % EC == 0), $sformatf("epoch_start at step %0d", c));
    end
    // SYNC: epoch 1234, received 7 cycles into the epoch
    sync_epoch = 1234;
    sync_phase = 7;
    sync_load = 1;
    @(negedge clk);
    sync_load = 0;
    check(synced, "synced after SYNC");
    check(epoch == 1234 && phase == 7 && epoch_start, "state right after SYNC");
    for (int c = 1; c <= EC; c++) begin
      @(negedge clk);
      check(int'(epoch) == 1234 + (7 + c) / EC && int'(phase) == (7 + c) % EC,
            $sformatf("after SYNC step %0d: epoch %0d phase %0d", c, epoch, phase));
      check(epoch_start == ((7 + c) % EC == 0), $sformatf("epoch_start after SYNC step %0d", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
