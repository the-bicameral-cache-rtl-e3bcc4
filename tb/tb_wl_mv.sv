// tb_wl_mv - matrix-vector product y = A x (32-bit integers, row-major A)
// on the full-size hierarchy through wl_harness: a stride-1 workload in which
// the rows of A stream through while x is reused on every row.
// Per row: for each strip of VL bits, vector loads of A[r][j..] and x[j..];
// then a scalar store of y[r]. Vector lengths 128, 512 and 4096 bits, prefetch
// off and on, on separate address ranges.
// Checks: every reference (in the harness), every y[r] against the product
// computed from the initial memory pattern, and that prefetching fills
// sectors and shortens the run.
// Size: 64 x 1024 (256 KB of A, 4 KB of x) rather than 4096 x 4096.
module tb_wl_mv;
  wl_harness h ();
  localparam int R = 64;
  localparam int C = 1024;

  task automatic run(input int vl_bits, input bit pf, input logic [31:0] base, output int cycles);
    logic [31:0] as [128];
    logic [31:0] acc, y;
    int nw;
    nw = vl_bits / 32;
    h.start_run(pf);
    for (int r = 0; r < R; r++) begin
      acc = 0;
      for (int j = 0; j < C; j += nw) begin
        h.vld(base + 32'h0040_0000 + 4 * (r * C + j), nw);     // A row strip
        for (int k = 0; k < nw; k++) as[k] = h.vbuf[k];
        h.vld(base + 32'h0010_0000 + 4 * j, nw);               // x strip
        for (int k = 0; k < nw; k++) acc += as[k] * h.vbuf[k];
      end
      h.sst(base + 32'h0020_0000 + 4 * r, acc);
    end
    h.end_run($sformatf("mv VL=%0d pf=%0d", vl_bits, pf), cycles);
    for (int r = 0; r < R; r++) begin
      acc = 0;
      for (int c = 0; c < C; c++)
        acc += h.init_word(base + 32'h0040_0000 + 4 * (r * C + c)) * h.init_word(base + 32'h0010_0000 + 4 * c);
      h.sld(base + 32'h0020_0000 + 4 * r, y);
      h.check(y == acc, $sformatf("y[%0d]", r));
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
      h.check(c_on < c_off, $sformatf("VL=%0d: prefetching shortens the run (%0d vs %0d)", vl, c_on, c_off));
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
