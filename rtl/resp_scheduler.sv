// resp_scheduler - the reflector's signal generator control: it answers a
// detected request with the batch of |B| responses, each sent after its
// secret waiting period T_W,n.
//
// Sequence of one session (one epoch serves at most one session):
//   IDLE  until an epoch starts while enabled and synchronized;
//   SCAN  the detector is cleared and armed and searches for REQ;
//   WAIT  the timer runs; response n starts when it reaches T_W,n;
//   SEND  response n is on the air (the upsampler's L*U samples);
//         after the last sample the timer restarts and the next response
//         is scheduled, or, after response |B|-1, the session is complete;
//   DONE  idle until the next epoch.
// The start of a new epoch ends the current session whatever its state: an
// unfinished batch is aborted (counted in aborts) and the detector is
// re-armed for the new epoch.
//
// Timing contract (one sample per cycle, T = one clock period). Let M be the
// cycle in which the request's peak sample was at the detector input; the
// detector reports it DET_LAT cycles later. The timer is started at M, so
//   first sample of response 0      is on tx in cycle M + T_W,0,
//   first sample of response n >= 1 is on tx in cycle E_{n-1} + 1 + T_W,n,
// where E_{n-1} is the cycle of the last sample of response n-1. This
// needs T_W,0 >= DET_LAT + 2 and T_W,n >= 1; a shorter wait sends as soon
// as possible and raises late for one cycle.
//
// From the paper: the timer started at the request's peak position, the
// n-th response sent when the timer reaches T_W,n, the timer reset when a
// response is complete, |B| responses per session, one session per epoch.
// This design's choice: the latency compensation, the late flag, the abort
// at the epoch boundary and the counters.
module resp_scheduler
  import rng_pkg::*;
#(
  parameter int unsigned NB      = rng_pkg::BATCH,
  parameter int unsigned DET_LAT = 300
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   enable,        // host enable
  input  logic                   synced,        // epoch known
  input  logic                   epoch_start,
  // detector
  input  logic                   det_trig,
  output logic                   det_clr,
  output logic                   det_en,
  // waiting periods
  output logic [$clog2(NB)-1:0]  resp_idx,      // n, also selects the response bits
  input  logic [TW_W-1:0]        tw,            // T_W,n for n = resp_idx
  // upsampler
  output logic                   tx_start,
  output logic                   tx_abort,
  input  logic                   tx_last,
  // status
  output sched_state_t           state,
  output logic                   late,
  output logic [15:0]            sessions,      // completed batches
  output logic [15:0]            aborts         // batches cut by an epoch boundary
);

  localparam int unsigned TMW = TW_W + 1;

  logic [TMW-1:0] timer;
  logic           due;

  assign det_en   = (state == S_SCAN);
  assign det_clr  = epoch_start && enable && synced;
  assign tx_abort = epoch_start && (state == S_SEND);
  assign due      = (timer + 1'b1) >= TMW'(tw);
  assign tx_start = (state == S_WAIT) && due && !epoch_start;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      timer    <= '0;
      resp_idx <= '0;
      late     <= 1'b0;
      sessions <= '0;
      aborts   <= '0;
    end else begin
      late <= 1'b0;
      if (timer != '1) timer <= timer + 1'b1;
      if (epoch_start) begin
        if (state == S_WAIT || state == S_SEND) aborts <= aborts + 1'b1;
        state    <= (enable && synced) ? S_SCAN : S_IDLE;
        resp_idx <= '0;
      end else begin
        unique case (state)
          S_IDLE: ;
          S_SCAN: if (det_trig) begin
            state    <= S_WAIT;
            resp_idx <= '0;
            timer    <= TMW'(DET_LAT + 1);
          end
          S_WAIT: if (due) begin
            state <= S_SEND;
            late  <= (timer + 1'b1) > TMW'(tw);
          end
          S_SEND: if (tx_last) begin
            timer <= '0;
            if (resp_idx == $clog2(NB)'(NB - 1)) begin
              state    <= S_DONE;
              sessions <= sessions + 1'b1;
            end else begin
              state    <= S_WAIT;
              resp_idx <= resp_idx + 1'b1;
            end
          end
          S_DONE: ;
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  a_trig_only_scanning: assert property (@(posedge clk) disable iff (!rst_n)
    det_trig |-> det_en) else $error("detector triggered while not armed");

endmodule
