// reflector_top - digital datapath of a secure broadcast ranging reflector,
// the part that runs on the SDR's FPGA.
//
// Received baseband samples go to the request detector, which correlates
// them with the secret request pattern of the current epoch. Its trigger
// starts the response scheduler, which sends the |B| secret responses of
// this reflector, each after its secret waiting period, through the BPSK
// upsampler to the transmit port. The epoch timer keeps tau and opens one
// session per epoch. The sequences and waiting periods are PRF outputs the
// host computes per epoch and writes into the sequence buffer.
//
//   rx --> req_detector --trig--> resp_scheduler --start--> tx_upsampler --> tx
//              ^ request bits           ^ T_W,n                 ^ response bits
//              +------------------ seq_buffer <---- host writes --+
//   sync_load/sync_epoch --> epoch_timer --epoch_start--> resp_scheduler
//
// Ports: one complex sample per clock on rx and tx (the clock is the sample
// clock, T = 10 ns at 100 MS/s). The SYNC receiver (postamble detection and
// decryption of E_K(I, tau)) is outside this module: it presents the decoded
// epoch on sync_load/sync_epoch/sync_phase. Status outputs report the epoch,
// the scheduler state and counters, and for the last detected request its
// metric and its peak position as an epoch phase (cycle M).
//
// Timing: response 0 starts exactly T_W,0 sample periods after the request's
// peak sample reached rx (plus the fixed latency of the RF chain outside),
// response n >= 1 exactly T_W,n after response n-1 ended; see
// resp_scheduler. The detector's own latency, DET_LAT below, is compensated.
//
// The structure (detector -> trigger -> signal generator -> upsampler)
// follows the paper's reflector diagram; the interfaces, the host bus and
// the status outputs are this design's choice.
module reflector_top
  import rng_pkg::*;
#(
  parameter int unsigned L         = rng_pkg::SEQ_LEN,
  parameter int unsigned NB        = rng_pkg::BATCH,
  parameter int unsigned L0        = rng_pkg::PEAK_WIN,
  parameter int unsigned ALPHA_    = rng_pkg::ALPHA,
  parameter int unsigned MAXU      = rng_pkg::MAX_UP,
  parameter int unsigned EPOCH_CYC = rng_pkg::EPOCH_CYCLES
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  logic                          enable,
  input  up_log2_t                      up_log2,
  input  host_wr_t                      host_wr,
  // from the SYNC receiver
  input  logic                          sync_load,
  input  logic [EPOCH_W-1:0]            sync_epoch,
  input  logic [$clog2(EPOCH_CYC)-1:0]  sync_phase,
  // radio
  input  iq_t                           rx,
  output iq_t                           tx,
  output logic                          tx_active,
  // status
  output logic [EPOCH_W-1:0]            epoch,
  output logic                          synced,
  output sched_state_t                  state,
  output logic [15:0]                   sessions,
  output logic [15:0]                   aborts,
  output logic [15:0]                   late_count,
  output logic [15:0]                   det_count,
  output logic [$clog2(L)+METRIC_FRAC:0] peak_metric,
  output logic [$clog2(EPOCH_CYC)-1:0]  peak_phase
);

  localparam int unsigned Q_W     = $clog2(L) + METRIC_FRAC + 1;
  localparam int unsigned DET_LAT = det_latency(MAXU, Q_W, L0);
  localparam int unsigned CW      = $clog2(EPOCH_CYC);

  // ---- epoch ------------------------------------------------------------------
  logic [CW-1:0] phase;
  logic          epoch_start;

  epoch_timer #(.EPOCH_CYC(EPOCH_CYC)) u_epoch (
    .clk, .rst_n,
    .sync_load, .sync_epoch, .sync_phase,
    .epoch, .phase, .epoch_start, .synced
  );

  // ---- sequence buffer --------------------------------------------------------
  logic [L-1:0]            req_bits;
  logic [$clog2(NB)-1:0]   resp_idx;
  logic [$clog2(L)-1:0]    sym;
  logic                    bit_cur, bit_nxt, nxt_valid;
  logic [TW_W-1:0]         tw;

  seq_buffer #(.L(L), .NB(NB)) u_buf (
    .clk, .rst_n,
    .wr        (host_wr),
    .req_bits,
    .rd_resp   (resp_idx),
    .rd_sym    (sym),
    .bit_cur, .bit_nxt, .nxt_valid,
    .rd_tw     (resp_idx),
    .tw
  );

  // ---- request detector -------------------------------------------------------
  logic det_trig, det_clr, det_en;

  req_detector #(.L(L), .L0(L0), .ALPHA_(ALPHA_), .MAXU(MAXU)) u_det (
    .clk, .rst_n,
    .clr     (det_clr),
    .en      (det_en),
    .up_log2,
    .pattern (req_bits),
    .rx,
    .trig    (det_trig),
    .peak_metric
  );

  // ---- signal generator -------------------------------------------------------
  logic tx_start, tx_abort, tx_last, late;

  resp_scheduler #(.NB(NB), .DET_LAT(DET_LAT)) u_sched (
    .clk, .rst_n,
    .enable, .synced, .epoch_start,
    .det_trig, .det_clr, .det_en,
    .resp_idx, .tw,
    .tx_start, .tx_abort, .tx_last,
    .state, .late, .sessions, .aborts
  );

  tx_upsampler #(.L(L), .MAXU(MAXU)) u_up (
    .clk, .rst_n,
    .start   (tx_start),
    .cancel  (tx_abort),
    .up_log2,
    .sym,
    .bit_cur, .bit_nxt, .nxt_valid,
    .tx,
    .tx_active,
    .last    (tx_last)
  );

  // ---- status -----------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      late_count <= '0;
      det_count  <= '0;
      peak_phase <= '0;
    end else begin
      if (late) late_count <= late_count + 1'b1;
      if (det_trig) begin
        det_count  <= det_count + 1'b1;
        // phase of cycle M = now - DET_LAT, modulo the epoch length
        peak_phase <= (phase >= CW'(DET_LAT)) ? phase - CW'(DET_LAT)
                                              : phase + CW'(EPOCH_CYC - DET_LAT);
      end
    end
  end

endmodule
