// seq_buffer - sequence buffer of the reflector: the request pattern, the
// |B| response sequences and the |B| waiting periods of the current epoch.
//
// The request REQ = H_K(I, tau), the responses RESP_n = H_K(R_k, tau, n)
// and the waiting periods T_W,n = H_K(R_k, tau, n, W) mod W are outputs of a
// keyed PRF that depend only on the epoch, so the host computes them ahead of
// time and writes them here; the FPGA only buffers them and replays them with
// sample accuracy. Writes come over a simple 32-bit word bus (rng_pkg
// host_wr_t), one word per cycle, with the address map given in rng_pkg:
//   region 0: request bits, word w holds bits 32w..32w+31
//   region 1: response bits, bit (n*L + b) is bit b of response n
//   region 2: word n holds T_W,n in samples (its TW_W LSBs)
// The request pattern is exposed in parallel for the correlator. Response
// bits are read combinationally, two at a time (symbol m and m+1, as the
// linear-interpolating upsampler needs both); reading past the last symbol
// of a response returns 0 in the valid flag so the upsampler can ramp down.
// T_W,n is read combinationally by index.
//
// From the paper: pre-generation of the sequences once the epoch is known and
// buffering of the responses in FPGA memory. This design's choice: the bus,
// the address map, the bit order and the combinational read ports.
module seq_buffer
  import rng_pkg::*;
#(
  parameter int unsigned L  = rng_pkg::SEQ_LEN,
  parameter int unsigned NB = rng_pkg::BATCH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  host_wr_t                  wr,
  // request pattern, to the detector
  output logic [L-1:0]              req_bits,
  // response read port, to the upsampler
  input  logic [$clog2(NB)-1:0]     rd_resp,     // response n
  input  logic [$clog2(L)-1:0]      rd_sym,      // symbol m
  output logic                      bit_cur,     // bit of symbol m
  output logic                      bit_nxt,     // bit of symbol m+1
  output logic                      nxt_valid,   // symbol m+1 exists (m < L-1)
  // waiting period read port, to the scheduler
  input  logic [$clog2(NB)-1:0]     rd_tw,
  output logic [TW_W-1:0]           tw
);

  localparam int unsigned RW      = L / 32;          // request words
  localparam int unsigned SW      = (NB * L) / 32;   // response words
  localparam int unsigned BITS_W  = $clog2(NB * L);
  localparam int unsigned RWW     = (RW > 1) ? $clog2(RW) : 1;
  localparam int unsigned SWW     = $clog2(SW);

  logic [31:0]     req_mem  [RW];
  logic [31:0]     resp_mem [SW];
  logic [TW_W-1:0] tw_mem   [NB];

  logic [1:0]         region;
  logic [HADDR_W-3:0] off;
  assign region = wr.addr[HADDR_W-1 -: 2];
  assign off    = wr.addr[HADDR_W-3:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int w = 0; w < RW; w++) req_mem[w] <= '0;
      for (int n = 0; n < NB; n++) tw_mem[n] <= '0;
    end else if (wr.en) begin
      if (region == REGION_REQ && off < (HADDR_W-2)'(RW)) req_mem[off[RWW-1:0]] <= wr.data;
      if (region == REGION_TW  && off < (HADDR_W-2)'(NB)) tw_mem[off[$clog2(NB)-1:0]] <= wr.data[TW_W-1:0];
    end
  end

  // Response memory: no reset, it is always written before use.
  always_ff @(posedge clk) begin
    if (wr.en && region == REGION_RESP && off < (HADDR_W-2)'(SW))
      resp_mem[off[SWW-1:0]] <= wr.data;
  end

  always_comb begin
    for (int w = 0; w < RW; w++) req_bits[32*w +: 32] = req_mem[w];
  end

  logic [BITS_W-1:0] idx_cur, idx_nxt;
  always_comb begin
    idx_cur   = BITS_W'(rd_resp) * BITS_W'(L) + BITS_W'(rd_sym);
    nxt_valid = (rd_sym != $clog2(L)'(L - 1));
    idx_nxt   = nxt_valid ? idx_cur + 1'b1 : idx_cur;
    bit_cur   = resp_mem[idx_cur[BITS_W-1:5]][idx_cur[4:0]];
    bit_nxt   = resp_mem[idx_nxt[BITS_W-1:5]][idx_nxt[4:0]];
    tw        = tw_mem[rd_tw];
  end

  initial assert (L % 32 == 0) else $error("L must be a multiple of 32");

endmodule
