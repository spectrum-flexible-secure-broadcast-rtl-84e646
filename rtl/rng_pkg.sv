// rng_pkg - types and constants shared by the secure broadcast ranging
// reflector.
//
// The reflector runs at one complex baseband sample per clock cycle (the
// clock is the sample clock, period T). Samples are 16-bit signed I/Q, the
// usual SDR sample format. Request and response sequences are secret random
// bit strings of L bits, BPSK-modulated (bit 1 -> +A, bit 0 -> -A on I, Q = 0).
// The default sizes follow the paper's evaluation setup: L = 512, batch size
// |B| = 10, peak window L0 = 256, ratio threshold alpha = 50, upsampling
// factors 1, 2 and 4 at fS = 100 MHz, epoch 1 s. Everything else here
// (widths, the host write bus, the address map) is this design's choice.
package rng_pkg;

  // ---- sizes from the paper -------------------------------------------
  parameter int unsigned SEQ_LEN      = 512;          // L
  parameter int unsigned BATCH        = 10;           // |B|
  parameter int unsigned PEAK_WIN     = 256;          // L0
  parameter int unsigned ALPHA        = 50;           // alpha
  parameter int unsigned MAX_UP       = 4;            // largest fS/B evaluated
  parameter int unsigned EPOCH_CYCLES = 100_000_000;  // 1 s at fS = 100 MHz

  // ---- sizes chosen here ----------------------------------------------
  parameter int unsigned SMP_W    = 16;   // I/Q sample width
  parameter int unsigned TW_W     = 24;   // waiting period width, in samples
  parameter int unsigned EPOCH_W  = 32;   // epoch index width
  parameter int unsigned HADDR_W  = 12;   // host write address width
  parameter int unsigned METRIC_FRAC = 8; // fraction bits of the peak metric

  typedef logic signed [SMP_W-1:0] smp_t;

  // One complex baseband sample.
  typedef struct packed {
    smp_t i;
    smp_t q;
  } iq_t;

  // Host write bus: one 32-bit word per cycle when en is high.
  typedef struct packed {
    logic               en;
    logic [HADDR_W-1:0] addr;
    logic [31:0]        data;
  } host_wr_t;

  // Host address map of the sequence buffer (word addresses).
  //   0x000 + w        request pattern, bits 32w .. 32w+31
  //   0x400 + w        response sequences, response n bit b is bit
  //                    (n*L + b) of this region
  //   0x800 + n        waiting period T_W,n in samples (TW_W LSBs)
  parameter logic [1:0] REGION_REQ  = 2'd0;
  parameter logic [1:0] REGION_RESP = 2'd1;
  parameter logic [1:0] REGION_TW   = 2'd2;

  // Upsampling factor fS/B coded as log2: 0 -> 1, 1 -> 2, 2 -> 4.
  typedef logic [1:0] up_log2_t;

  // States of the response scheduler (the reflector's signal generator).
  typedef enum logic [2:0] {
    S_IDLE = 3'd0,   // waiting for the start of an epoch
    S_SCAN = 3'd1,   // detector armed, looking for the request
    S_WAIT = 3'd2,   // timer running towards T_W,n
    S_SEND = 3'd3,   // response n on the air
    S_DONE = 3'd4    // batch complete, idle until the next epoch
  } sched_state_t;

  // Pipeline depth of the request detector from the cycle the sample of the
  // request's last symbol (its first upsampled sample) is presented at the
  // detector input, to the cycle its trigger pulse is high. See
  // req_detector for the stage list.
  function automatic int unsigned det_latency(int unsigned max_up,
                                              int unsigned q_w,
                                              int unsigned l0);
    return (max_up - 1) + 1 + 1 + 1 + 1 + q_w + l0 + 1;
  endfunction

endpackage
