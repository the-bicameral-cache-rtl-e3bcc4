// tb_wl_mm - matrix-matrix product C += A B (32-bit integers, row-major,
// i-k-j loop order) on the full-size hierarchy through wl_harness: a stride-1
// workload mixing scalar and vector references.
// For each i and k: a scalar load of A[i][k], then for each strip of VL bits
// vector loads of B[k][j..] and C[i][j..] and a vector store of C[i][j..].
// Vector lengths 128, 512 and 4096 bits, prefetch off and on.
// Checks: every reference (in the harness), every C[i][j] against the
// product computed from the initial memory pattern, and that prefetching
// fills sectors.
// Size: 64 x 64 matrices (16 KB each) rather than 256 x 256.
module tb_wl_mm;
  wl_harness h ();
  localparam int N = 64;

  task automatic run(input int vl_bits, input bit pf, input logic [31:0] base, output int cycles);
    logic [31:0] bs [128];
    logic [31:0] a, e;
    int nw;
    nw = vl_bits / 32;
    if (nw > N) nw = N;
    h.start_run(pf);
    for (int i = 0; i < N; i++)
      for (int k = 0; k < N; k++) begin
        h.sld(base + 32'h0010_0000 + 4 * (i * N + k), a);
        for (int j = 0; j < N; j += nw) begin
          h.vld(base + 32'h0020_0000 + 4 * (k * N + j), nw);
          for (int q = 0; q < nw; q++) bs[q] = h.vbuf[q];
          h.vld(base + 32'h0030_0000 + 4 * (i * N + j), nw);
          for (int q = 0; q < nw; q++) h.vbuf[q] += a * bs[q];
          h.vst(base + 32'h0030_0000 + 4 * (i * N + j), nw);
        end
      end
    h.end_run($sformatf("mm VL=%0d pf=%0d", vl_bits, pf), cycles);
    for (int i = 0; i < N; i++) begin
      h.vld(base + 32'h0030_0000 + 4 * (i * N), N);
      for (int j = 0; j < N; j++) begin
        e = h.init_word(base + 32'h0030_0000 + 4 * (i * N + j));
        for (int k = 0; k < N; k++)
          e += h.init_word(base + 32'h0010_0000 + 4 * (i * N + k)) *
               h.init_word(base + 32'h0020_0000 + 4 * (k * N + j));
        h.check(h.vbuf[j] == e, $sformatf("C[%0d][%0d]", i, j));
      end
    end
  endtask

  initial begin
    int c_off, c_on, r;
    r = 0;
    for (int v = 0; v < 3; v++) begin
      int vl;
      vl = v == 0 ? 128 : v == 1 ? 512 : 4096;
      run(vl, 0, 32'h1000_0000 * (r++), c_off);
      run(vl, 1, 32'h1000_0000 * (r++), c_on);
      h.check(h.cnt[1] > 0, "prefetch filled sectors");
    end
    h.finish_all();
  end

  initial begin
    repeat (6000000) @(posedge h.clk);
    h.failures++;
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures);
    $finish;
  end
endmodule
