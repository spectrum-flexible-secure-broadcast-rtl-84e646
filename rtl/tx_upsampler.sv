// tx_upsampler - BPSK modulator and upsampler of the transmit chain.
//
// A burst of L symbols s_m = +-1 (bit 1 -> +1, bit 0 -> -1) is sent as L*U
// samples, U = fS/B = 2**up_log2. Sample j (0..U-1) of symbol m is
//     y = AMP * ((U-j) * s_m + j * s_{m+1}) / U,   s_L = 0,
// on I, with Q = 0. This is zero-stuffing by U followed by a triangular
// low-pass FIR of 2U-1 taps (linear interpolation), which narrows the
// occupied band to about B while the sample rate stays fS. For U = 1 it is
// plain BPSK at one symbol per sample. The last symbol ramps down to zero.
//
// Interface: pulse start for one cycle (while idle); the module then walks
// sym = 0..L-1, reading bit_cur/bit_nxt/nxt_valid combinationally from the
// sequence buffer. The first sample is on tx (registered) in the cycle after
// start; tx_active is high for exactly L*U cycles and last marks the final
// sample. cancel stops a burst at once (tx returns to zero next cycle).
//
// From the paper: BPSK modulation and interpolation with a low-pass filter
// by fS/B (1, 2, 4 evaluated). This design's choice: the triangular filter,
// the amplitude AMP and the ramp-down of the last symbol.
module tx_upsampler
  import rng_pkg::*;
#(
  parameter int unsigned L    = rng_pkg::SEQ_LEN,
  parameter int unsigned MAXU = rng_pkg::MAX_UP,
  parameter int unsigned AMP  = 8192
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  cancel,
  input  up_log2_t              up_log2,
  output logic [$clog2(L)-1:0]  sym,
  input  logic                  bit_cur,
  input  logic                  bit_nxt,
  input  logic                  nxt_valid,
  output iq_t                   tx,
  output logic                  tx_active,
  output logic                  last
);

  localparam int unsigned UW = $clog2(MAXU) + 1;

  logic          busy;
  logic [UW-1:0] ph;       // j of the sample being produced
  logic [UW-1:0] u;
  assign u = UW'(1) << up_log2;

  // Interpolated sample for (sym, ph), as an integer in [-U, U] times AMP/U.
  logic signed [UW+1:0]  a_cur, a_nxt, v;
  logic signed [SMP_W-1:0] y;
  always_comb begin
    a_cur = bit_cur ? (UW+2)'(1) : -(UW+2)'(1);
    a_nxt = !nxt_valid ? '0 : (bit_nxt ? (UW+2)'(1) : -(UW+2)'(1));
    v     = a_cur * $signed({2'b00, u - ph}) + a_nxt * $signed({2'b00, ph});
    y     = SMP_W'((32'(signed'(v)) * signed'(32'(AMP))) >>> up_log2);
  end

  logic producing;
  assign producing = (busy || start) && !cancel;

  logic end_of_burst;
  assign end_of_burst = (ph == u - 1'b1) && (sym == $clog2(L)'(L - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      ph        <= '0;
      sym       <= '0;
      tx        <= '0;
      tx_active <= 1'b0;
      last      <= 1'b0;
    end else begin
      tx_active <= producing;
      last      <= producing && end_of_burst;
      tx.i      <= producing ? y : '0;
      tx.q      <= '0;
      if (!producing) begin
        busy <= 1'b0;
        ph   <= '0;
        sym  <= '0;
      end else if (end_of_burst) begin
        busy <= 1'b0;
        ph   <= '0;
        sym  <= '0;
      end else begin
        busy <= 1'b1;
        if (ph == u - 1'b1) begin
          ph  <= '0;
          sym <= sym + 1'b1;
        end else begin
          ph <= ph + 1'b1;
        end
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("start while a burst is running");

endmodule
