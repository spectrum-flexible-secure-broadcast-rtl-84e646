// epoch_timer - the reflector's time epoch, tau = floor(t / dtau).
//
// A cycle counter runs from 0 to EPOCH_CYC-1 (dtau = EPOCH_CYC sample
// periods, 1 s at 100 MS/s by default); at its wrap the epoch index tau
// increments and epoch_start pulses for one cycle. On sync_load (the epoch
// carried by a received SYNC message, decoded elsewhere) tau takes
// sync_epoch, the counter takes sync_phase (the host's estimate of how far
// into the epoch the SYNC was received, e.g. its processing delay) and
// epoch_start pulses, since the initiator sends SYNC at the start of its
// epoch and REQ right after it. synced goes high at the first sync_load and
// stays high: before it the reflector does not know the epoch.
//
// Timing: outputs are registered; epoch_start is high in the first cycle of
// an epoch, when tau already holds the new value.
//
// From the paper: tau = floor(t/dtau), dtau = 1 s, the epoch update on SYNC.
// This design's choice: the phase load and the synced flag.
module epoch_timer
  import rng_pkg::*;
#(
  parameter int unsigned EPOCH_CYC = rng_pkg::EPOCH_CYCLES
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          sync_load,
  input  logic [EPOCH_W-1:0]            sync_epoch,
  input  logic [$clog2(EPOCH_CYC)-1:0]  sync_phase,
  output logic [EPOCH_W-1:0]            epoch,
  output logic [$clog2(EPOCH_CYC)-1:0]  phase,
  output logic                          epoch_start,
  output logic                          synced
);

  localparam int unsigned CW = $clog2(EPOCH_CYC);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      epoch       <= '0;
      phase       <= '0;
      epoch_start <= 1'b0;
      synced      <= 1'b0;
    end else if (sync_load) begin
      epoch       <= sync_epoch;
      phase       <= sync_phase;
      epoch_start <= 1'b1;
      synced      <= 1'b1;
    end else if (phase == CW'(EPOCH_CYC - 1)) begin
      epoch       <= epoch + 1'b1;
      phase       <= '0;
      epoch_start <= 1'b1;
    end else begin
      phase       <= phase + 1'b1;
      epoch_start <= 1'b0;
    end
  end

  a_phase_range: assert property (@(posedge clk) disable iff (!rst_n) phase < CW'(EPOCH_CYC))
    else $error("epoch phase out of range");

endmodule
