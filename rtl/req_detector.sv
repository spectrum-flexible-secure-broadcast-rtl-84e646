// req_detector - request detector of the reflector: normalized
// cross-correlation of the received samples with the secret, upsampled
// request pattern, followed by peak detection.
//
// How it works. The request is L BPSK symbols, each upsampled to U samples
// by linear interpolation (see tx_upsampler). Correlating the received
// stream r with that upsampled pattern q is rewritten exactly as
//     X_l = sum_m s_m * g_{l+mU},  s_m = +-1,
// where g is r passed through a symmetric triangular FIR of 2U-1 taps with
// weights U-|i| (the transposed interpolation filter). So the receive chain
// needs no downsampler: a short prefilter runs at the full sample rate, and
// the correlator itself is L add/subtracts on taps spaced U samples apart.
// The normalization of the paper's Eq. for C_l uses the energy of the
// correlated samples: E_l = sum_m |g_{l+mU}|^2, kept exactly by U running
// accumulators (one per sample phase). The metric
//     metric_l = floor(2^FRAC * |X_l|^2 / E_l)  =  2^FRAC * L * |C_l|^2
// is computed by a pipelined divider; it is at most L * 2^FRAC.
//
// Peak rule. The paper asks that the peak stand above the values in its
// vicinity [l-L0, l+L0] by a ratio alpha. Taken word for word (above every
// single neighbour) that cannot hold with an upsampled pattern, whose main
// lobe is several samples wide, nor at L = 512 whose sidelobes are about
// 1/sqrt(L). This design applies alpha to the power against the window
// mean: lag M is a peak when metric_M is the largest metric since the
// candidate was taken, stays so for the next L0 lags, is non-zero, and
//     metric_M * 2*L0 >= alpha * (sum of the other 2*L0 metrics in the window).
// A new candidate is taken whenever a metric exceeds the current one; a
// candidate that fails the test after L0 lags is dropped.
//
// Timing. One sample per clock. Let cycle M be the cycle in which the first
// sample of the request's last symbol is presented on rx. The trigger is a
// one-cycle pulse in cycle M + rng_pkg::det_latency(MAX_UP, Q_W, L0):
//   rx history register 1, prefilter centre MAX_UP-1, prefilter register 1,
//   correlator/energy register 1, power register 1, divider Q_W,
//   candidate age L0, trigger register 1.
// clr synchronously empties every delay line, accumulator and the
// candidate; it must be pulsed after up_log2 changes.
//
// From the paper: normalized correlation, window L0, ratio alpha, the
// receive chain without downsampler working on the upsampled pattern.
// This design's choice: the prefilter factorization, the energy of the
// prefiltered samples in the normalization (identical to the paper's for
// U = 1), the power-versus-mean form of the alpha test, fixed-point widths.
module req_detector
  import rng_pkg::*;
#(
  parameter int unsigned L      = rng_pkg::SEQ_LEN,
  parameter int unsigned L0     = rng_pkg::PEAK_WIN,
  parameter int unsigned ALPHA_ = rng_pkg::ALPHA,
  parameter int unsigned MAXU   = rng_pkg::MAX_UP,
  parameter int unsigned FRAC   = rng_pkg::METRIC_FRAC
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,        // empty all state (start of a scan)
  input  logic          en,         // allow triggers
  input  up_log2_t      up_log2,    // U = 2**up_log2, at most MAXU
  input  logic [L-1:0]  pattern,    // request bits, bit m = symbol m (sent first: m = 0)
  input  iq_t           rx,         // received sample, one per cycle
  output logic          trig,       // request detected (one-cycle pulse)
  output logic [$clog2(L)+FRAC:0] peak_metric  // metric of the detected peak
);

  // ---- widths -------------------------------------------------------------
  localparam int unsigned LW    = $clog2(L);
  localparam int unsigned UW    = $clog2(MAXU) + 1;
  localparam int unsigned G_W   = SMP_W + 2*$clog2(MAXU) + 1;      // prefilter output
  localparam int unsigned X_W   = G_W + LW + 1;                    // correlation
  localparam int unsigned SQ_W  = 2*G_W;                           // |g|^2
  localparam int unsigned E_W   = SQ_W + LW + 1;                   // energy
  localparam int unsigned P_W   = 2*X_W;                           // |X|^2
  localparam int unsigned Q_W   = LW + FRAC + 1;                   // metric
  localparam int unsigned S_W   = Q_W + $clog2(2*L0) + 1;          // window sum
  localparam int unsigned HLEN  = 2*MAXU - 1;                      // prefilter span
  localparam int unsigned GLEN  = L*MAXU + 1;                      // correlator delay line
  localparam int unsigned AW    = $clog2(L0 + 1);

  typedef logic signed [G_W-1:0] g_t;

  function automatic logic [SQ_W-1:0] sq(g_t v);
    logic signed [SQ_W-1:0] w;
    w = SQ_W'(v);
    return SQ_W'(w * w);
  endfunction

  function automatic logic [P_W-1:0] psq(logic signed [X_W-1:0] v);
    logic signed [P_W-1:0] w;
    w = P_W'(v);
    return P_W'(w * w);
  endfunction

  logic [UW-1:0] u;
  assign u = UW'(1) << up_log2;

  // ---- receive history ------------------------------------------------------
  iq_t rh [HLEN];
  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int d = 0; d < HLEN; d++) rh[d] <= '0;
    end else begin
      rh[0] <= rx;
      for (int d = 1; d < HLEN; d++) rh[d] <= rh[d-1];
    end
  end

  // ---- triangular prefilter, centre tap at rh[MAXU-1] -----------------------
  g_t gi_c, gq_c;
  always_comb begin
    gi_c = '0;
    gq_c = '0;
    for (int d = 0; d < HLEN; d++) begin
      automatic int ofs = (d >= int'(MAXU) - 1) ? d - (int'(MAXU) - 1) : (int'(MAXU) - 1) - d;
      automatic int w   = int'(u) - ofs;
      if (w > 0) begin
        gi_c += g_t'(rh[d].i) * g_t'(w);
        gq_c += g_t'(rh[d].q) * g_t'(w);
      end
    end
  end

  // ---- correlator delay line ------------------------------------------------
  g_t gli [GLEN];
  g_t glq [GLEN];
  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int k = 0; k < GLEN; k++) begin
        gli[k] <= '0;
        glq[k] <= '0;
      end
    end else begin
      gli[0] <= gi_c;
      glq[0] <= gq_c;
      for (int k = 1; k < GLEN; k++) begin
        gli[k] <= gli[k-1];
        glq[k] <= glq[k-1];
      end
    end
  end

  // ---- correlation: symbol m sits at tap (L-1-m)*U --------------------------
  logic signed [X_W-1:0] xi_c, xq_c;
  always_comb begin
    xi_c = '0;
    xq_c = '0;
    for (int m = 0; m < int'(L); m++) begin
      automatic logic [LW+UW-1:0] tap = (LW+UW)'(int'(L) - 1 - m) << up_log2;
      if (pattern[m]) begin
        xi_c += X_W'(gli[tap]);
        xq_c += X_W'(glq[tap]);
      end else begin
        xi_c -= X_W'(gli[tap]);
        xq_c -= X_W'(glq[tap]);
      end
    end
  end

  // ---- energy of the correlated samples, one accumulator per phase ----------
  logic [E_W-1:0]  acc [MAXU];
  logic [UW-1:0]   ph;
  logic [SQ_W-1:0] sq_new, sq_old;
  logic [E_W-1:0]  e_c;
  g_t              oi, oq;
  always_comb begin
    oi     = gli[int'(L) << up_log2];
    oq     = glq[int'(L) << up_log2];
    sq_new = sq(gli[0]) + sq(glq[0]);
    sq_old = sq(oi) + sq(oq);
    e_c    = acc[ph[UW-2:0]] + E_W'(sq_new) - E_W'(sq_old);
  end

  logic signed [X_W-1:0] xi_r, xq_r;
  logic [E_W-1:0]        e_r, e_r2;
  logic [P_W-1:0]        p_r;
  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int p = 0; p < MAXU; p++) acc[p] <= '0;
      ph   <= '0;
      xi_r <= '0;
      xq_r <= '0;
      e_r  <= '0;
      e_r2 <= '0;
      p_r  <= '0;
    end else begin
      acc[ph[UW-2:0]] <= e_c;
      ph   <= (ph + 1'b1) & (u - 1'b1);
      xi_r <= xi_c;
      xq_r <= xq_c;
      e_r  <= e_c;
      p_r  <= psq(xi_r) + psq(xq_r);
      e_r2 <= e_r;
    end
  end

  // ---- normalization ---------------------------------------------------------
  logic [Q_W-1:0] metric;
  metric_divider #(
    .NUM_W (P_W),
    .DEN_W (E_W),
    .FRAC  (FRAC),
    .Q_W   (Q_W)
  ) u_div (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (clr),
    .num   (p_r),
    .den   (e_r2),
    .quo   (metric)
  );

  // ---- peak detection over the window [M-L0, M+L0] ---------------------------
  logic [Q_W-1:0] ml [2*L0];      // ml[0] = previous metric
  logic [S_W-1:0] wsum;           // sum of ml[0 .. 2*L0-1]
  logic [Q_W-1:0] cand;
  logic           cand_v;
  logic [AW-1:0]  age;
  logic [S_W-1:0] others;
  logic [S_W+7:0] lhs, rhs;
  logic           replace, decide, pass;

  always_comb begin
    replace = !cand_v || (metric > cand);
    decide  = cand_v && !replace && (age == AW'(L0 - 1));
    others  = wsum + S_W'(metric) - S_W'(cand);
    lhs     = (S_W+8)'(cand) * (S_W+8)'(2*L0);
    rhs     = (S_W+8)'(others) * (S_W+8)'(ALPHA_);
    pass    = decide && (cand != '0) && (lhs >= rhs);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int k = 0; k < 2*L0; k++) ml[k] <= '0;
      wsum        <= '0;
      cand        <= '0;
      cand_v      <= 1'b0;
      age         <= '0;
      trig        <= 1'b0;
      peak_metric <= '0;
    end else begin
      ml[0] <= metric;
      for (int k = 1; k < 2*L0; k++) ml[k] <= ml[k-1];
      wsum <= wsum + S_W'(metric) - S_W'(ml[2*L0-1]);
      trig <= pass && en;
      if (pass) peak_metric <= cand;
      if (replace) begin
        cand   <= metric;
        cand_v <= 1'b1;
        age    <= '0;
      end else if (decide) begin
        cand_v <= 1'b0;
        cand   <= '0;
        age    <= '0;
      end else begin
        age <= age + 1'b1;
      end
    end
  end

  // Configuration rules.
  initial assert (MAXU inside {2, 4, 8}) else $error("MAXU must be 2, 4 or 8");
  a_up_range: assert property (@(posedge clk) disable iff (!rst_n) u <= UW'(MAXU))
    else $error("up_log2 selects a factor above MAXU");

endmodule
