// tb_wl_jacobi2d - the 2-D Jacobi stencil on 32-bit integers,
// B[i][j] = A[i][j] + A[i-1][j] + A[i+1][j] + A[i][j-1] + A[i][j+1] over the
// interior, then the same from B back into A, on the full-size hierarchy
// through wl_harness: a stride-1 workload with unaligned vector loads (the
// j-1 and j+1 neighbours straddle sectors) and heavy reuse of the rows.
// Vector lengths 128, 512 and 4096 bits, prefetch off and on.
// Checks: every reference (in the harness), the whole final grid against a
// copy of the computation done on testbench arrays from the initial memory
// pattern, and that prefetching fills sectors.
// Size: a 64 x 64 grid (16 KB per array), two time steps.
module tb_wl_jacobi2d;
  wl_harness h ();
  localparam int N = 64;
  localparam int T = 2;

  logic [31:0] ga [N][N];
  logic [31:0] gb [N][N];

  task automatic run(input int vl_bits, input bit pf, input logic [31:0] base, output int cycles);
    logic [31:0] s [128];
    int nw;
    logic [31:0] src, dst;
    nw = vl_bits / 32;
    h.start_run(pf);
    for (int t = 0; t < T; t++) begin
      src = base + (t % 2 == 0 ? 32'h0010_0000 : 32'h0020_0000);
      dst = base + (t % 2 == 0 ? 32'h0020_0000 : 32'h0010_0000);
      for (int i = 1; i < N - 1; i++)
        for (int j = 1; j < N - 1; j += nw) begin
          int n;
          n = (N - 1 - j) < nw ? (N - 1 - j) : nw;
          for (int q = 0; q < n; q++) s[q] = 0;
          h.vld(src + 4 * ((i - 1) * N + j), n); for (int q = 0; q < n; q++) s[q] += h.vbuf[q];
          h.vld(src + 4 * ((i + 1) * N + j), n); for (int q = 0; q < n; q++) s[q] += h.vbuf[q];
          h.vld(src + 4 * (i * N + j - 1), n);   for (int q = 0; q < n; q++) s[q] += h.vbuf[q];
          h.vld(src + 4 * (i * N + j + 1), n);   for (int q = 0; q < n; q++) s[q] += h.vbuf[q];
          h.vld(src + 4 * (i * N + j), n);       for (int q = 0; q < n; q++) s[q] += h.vbuf[q];
          for (int q = 0; q < n; q++) h.vbuf[q] = s[q];
          h.vst(dst + 4 * (i * N + j), n);
        end
    end
    h.end_run($sformatf("jacobi-2d VL=%0d pf=%0d", vl_bits, pf), cycles);
    // independent computation
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        ga[i][j] = h.init_word(base + 32'h0010_0000 + 4 * (i * N + j));
        gb[i][j] = h.init_word(base + 32'h0020_0000 + 4 * (i * N + j));
      end
    for (int t = 0; t < T; t++)
      for (int i = 1; i < N - 1; i++)
        for (int j = 1; j < N - 1; j++)
          if (t % 2 == 0) gb[i][j] = ga[i][j] + ga[i-1][j] + ga[i+1][j] + ga[i][j-1] + ga[i][j+1];
          else            ga[i][j] = gb[i][j] + gb[i-1][j] + gb[i+1][j] + gb[i][j-1] + gb[i][j+1];
    for (int i = 0; i < N; i++) begin
      h.vld(base + 32'h0010_0000 + 4 * i * N, N);
      for (int j = 0; j < N; j++) h.check(h.vbuf[j] == ga[i][j], $sformatf("A[%0d][%0d]", i, j));
      h.vld(base + 32'h0020_0000 + 4 * i * N, N);
      for (int j = 0; j < N; j++) h.check(h.vbuf[j] == gb[i][j], $sformatf("B[%0d][%0d]", i, j));
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
