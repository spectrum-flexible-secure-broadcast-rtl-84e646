// tb_seq_buffer - self-checking test of the sequence buffer.
//
// Writes a random request pattern, random response sequences and waiting
// periods over the host bus, then checks the parallel request output, every
// (response, symbol) pair of the two-bit read port including the end of
// sequence flag, and the waiting period read port, against a copy kept in
// the testbench. Writes outside the map must change nothing.
module tb_seq_buffer;
  import rng_pkg::*;

  localparam int L  = 128;
  localparam int NB = 10;

  logic clk = 0, rst_n = 0;
  host_wr_t wr;
  logic [L-1:0] req_bits;
  logic [$clog2(NB)-1:0] rd_resp, rd_tw;
  logic [$clog2(L)-1:0] rd_sym;
  logic bit_cur, bit_nxt, nxt_valid;
  logic [TW_W-1:0] tw;

  seq_buffer #(.L(L), .NB(NB)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [L-1:0]    req_ref;
  logic [L-1:0]    resp_ref [NB];
  logic [TW_W-1:0] tw_ref [NB];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic write(input int region, input int off, input logic [31:0] d);
    @(negedge clk);
    wr.en = 1;
    wr.addr = HADDR_W'((region << (HADDR_W - 2)) | off);
    wr.data = d;
    @(negedge clk);
    wr.en = 0;
  endtask

  initial begin
    wr = '0;
    rd_resp = 0; rd_tw = 0; rd_sym = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < L / 32; w++) begin
      logic [31:0] d;
      d = $urandom;
      req_ref[32*w +: 32] = d;
      write(0, w, d);
    end
    for (int n = 0; n < NB; n++)
      for (int w = 0; w < L / 32; w++) begin
        logic [31:0] d;
        d = $urandom;
        resp_ref[n][32*w +: 32] = d;
        write(1, n * (L / 32) + w, d);
      end
    for (int n = 0; n < NB; n++) begin
      logic [31:0] d;
      d = $urandom;
      tw_ref[n] = d[TW_W-1:0];
      write(2, n, d);
    end
    // out-of-map writes: request offset past the pattern, waiting period past |B|
    write(0, L / 32, 32'hFFFF_FFFF);
    write(2, NB, 32'h00AB_CDEF);
    @(negedge clk);
    check(req_bits == req_ref, "request pattern");
    for (int n = 0; n < NB; n++) begin
      rd_resp = $clog2(NB)'(n);
      rd_tw   = $clog2(NB)'(n);
      #1;
      check(tw == tw_ref[n], $sformatf("T_W,%0d = %0d, expected %0d", n, tw, tw_ref[n]));
      for (int m = 0; m < L; m++) begin
        rd_sym = $clog2(L)'(m);
        #1;
        check(bit_cur == resp_ref[n][m], $sformatf("resp %0d sym %0d", n, m));
        check(nxt_valid == (m < L - 1), $sformatf("resp %0d sym %0d nxt_valid", n, m));
        if (m < L - 1)
          check(bit_nxt == resp_ref[n][m+1], $sformatf("resp %0d sym %0d next", n, m));
      end
    end
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
