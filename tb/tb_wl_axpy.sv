// tb_wl_axpy - the axpy kernel, y[i] = a * x[i] + y[i] on 32-bit integers,
// run on the full-size hierarchy through wl_harness: the stride-1 case.
// Per strip of VL bits: vector load of x, vector load of y, vector store of y,
// and the scalar loop bookkeeping (load and store of a counter on the stack).
// It runs with vector lengths of 128, 512 and 4096 bits, each with the prefetcher
// off and on, on separate address ranges.
// Checks: every reference (in the harness), every final y[i] against
// a * x0[i] + y0[i] computed from the initial memory pattern, and that
// prefetching shortens the run and fills sectors, as the prefetcher exists to.
// Size: 2 x 128 KB arrays, twice the Vector Cache, rather than the 2 x 1 MB
// of the full benchmark input, to keep the simulation short.
module tb_wl_axpy;
  wl_harness h ();
  localparam int N = 32768;
  localparam logic [31:0] A = 32'd3;

  task automatic run(input int vl_bits, input bit pf, input logic [31:0] base, output int cycles);
    logic [31:0] xs [128];
    logic [31:0] c;
    int nw;
    nw = vl_bits / 32;
    h.start_run(pf);
    for (int i = 0; i < N; i += nw) begin
      h.sld(base + 32'h0300_0000, c);                    // loop counter
      h.vld(base + 32'h0010_0000 + 4 * i, nw);            // x
      for (int k = 0; k < nw; k++) xs[k] = h.vbuf[k];
      h.vld(base + 32'h0020_0000 + 4 * i, nw);            // y
      for (int k = 0; k < nw; k++) h.vbuf[k] = A * xs[k] + h.vbuf[k];
      h.vst(base + 32'h0020_0000 + 4 * i, nw);
      h.sst(base + 32'h0300_0000, c + 1);
    end
    h.end_run($sformatf("axpy VL=%0d pf=%0d", vl_bits, pf), cycles);
    // final result, read back through the caches
    for (int i = 0; i < N; i += 128) begin
      h.vld(base + 32'h0020_0000 + 4 * i, 128);
      for (int k = 0; k < 128; k++)
        h.check(h.vbuf[k] == A * h.init_word(base + 32'h0010_0000 + 4 * (i + k))
                            + h.init_word(base + 32'h0020_0000 + 4 * (i + k)),
                $sformatf("y[%0d]", i + k));
    end
  endtask

  initial begin
    int c_off, c_on, r;
    r = 0;
    foreach (h.cnt[i]) h.cnt[i] = 0;
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
