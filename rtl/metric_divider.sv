// metric_divider - pipelined unsigned restoring divider for the detector's
// normalized correlation metric.
//
// Computes quo = floor((num << FRAC) / den) one quotient bit per pipeline
// stage, most significant bit first. The caller guarantees that the true
// quotient is below 2**Q_W (for the detector this follows from the
// Cauchy-Schwarz inequality: |X|^2 <= L * E), so Q_W stages are enough and
// no overflow handling is needed. A zero divisor gives a zero quotient.
//
// Interface: one division may enter per cycle; the result appears exactly
// Q_W cycles after its operands were presented (fully pipelined, no stall).
// clr synchronously empties the pipeline. The divider itself is this
// design's choice: the paper states the normalization, not how to build it.
module metric_divider #(
  parameter int unsigned NUM_W = 58,
  parameter int unsigned DEN_W = 48,
  parameter int unsigned FRAC  = 8,
  parameter int unsigned Q_W   = 18
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic [Q_W-1:0]   quo
);

  localparam int unsigned RW = NUM_W + FRAC + 1;   // remainder width

  logic [RW-1:0]    rem_q [Q_W+1];
  logic [DEN_W-1:0] den_q [Q_W+1];
  logic [Q_W-1:0]   quo_q [Q_W+1];

  always_comb begin
    rem_q[0] = RW'({num, FRAC'(0)});
    den_q[0] = den;
    quo_q[0] = '0;
  end

  for (genvar k = 0; k < Q_W; k++) begin : g_stage
    // Stage k decides quotient bit Q_W-1-k.
    localparam int unsigned SH = Q_W - 1 - k;
    logic [RW+Q_W-1:0] dsh;
    logic              ge;
    always_comb begin
      dsh = (RW+Q_W)'(den_q[k]) << SH;
      ge  = ((RW+Q_W)'(rem_q[k]) >= dsh) && (den_q[k] != '0);
    end
    always_ff @(posedge clk) begin
      if (!rst_n || clr) begin
        rem_q[k+1] <= '0;
        den_q[k+1] <= '0;
        quo_q[k+1] <= '0;
      end else begin
        rem_q[k+1] <= ge ? RW'((RW+Q_W)'(rem_q[k]) - dsh) : rem_q[k];
        den_q[k+1] <= den_q[k];
        quo_q[k+1] <= quo_q[k] | (ge ? (Q_W'(1) << SH) : '0);
      end
    end
  end

  assign quo = quo_q[Q_W];

endmodule
