// tb_wl_spmv - sparse matrix-vector product y = A x in CSR form (32-bit
// integers) on the full-size hierarchy through wl_harness: the non-stride-1
// case. Per row: scalar loads of row_ptr[r] and row_ptr[r+1]; for each strip
// of VL bits of the row's non-zeros, vector loads of the column indices and
// values and an indexed vector load (gather) of x by those indices, one
// reference per element; then a scalar store of y[r].
// The matrix structure is random (1 to 24 non-zeros per row, columns spread
// over x) and is first written to memory by the core itself (scalar stores of
// row_ptr, vector stores of the column indices), so the gathers use indices
// read back through the caches. Values and x keep the initial memory pattern.
// Vector lengths 128, 512 and 4096 bits, prefetch off and on.
// Checks: every reference (in the harness) and every y[r] against the product
// computed by the testbench from its own copy of the structure.
// Size: 256 rows, x of 4096 elements (16 KB), about 3200 non-zeros.
module tb_wl_spmv;
  wl_harness h ();
  localparam int R = 256;
  localparam int C = 4096;
  localparam logic [31:0] PTR = 32'h0010_0000, COL = 32'h0020_0000, VAL = 32'h0030_0000,
                          X = 32'h0040_0000, Y = 32'h0050_0000;

  int unsigned rp [R + 1];
  int unsigned cols [$];

  task automatic run(input int vl_bits, input bit pf, input logic [31:0] base, output int cycles);
    logic [31:0] p0, p1, acc, y;
    logic [31:0] vs [128];
    int unsigned idx [];
    int nw;
    nw = vl_bits / 32;
    h.start_run(pf);
    // the structure, written by the core
    for (int r = 0; r <= R; r++) h.sst(base + PTR + 4 * r, rp[r]);
    for (int k = 0; k < cols.size(); k += 16) begin
      int n;
      n = (cols.size() - k) < 16 ? (cols.size() - k) : 16;
      for (int q = 0; q < n; q++) h.vbuf[q] = cols[k + q];
      h.vst(base + COL + 4 * k, n);
    end
    // the kernel
    for (int r = 0; r < R; r++) begin
      h.sld(base + PTR + 4 * r, p0);
      h.sld(base + PTR + 4 * (r + 1), p1);
      acc = 0;
      for (int k = int'(p0); k < int'(p1); k += nw) begin
        int n;
        n = (int'(p1) - k) < nw ? (int'(p1) - k) : nw;
        h.vld(base + COL + 4 * k, n);
        idx = new[n];
        for (int q = 0; q < n; q++) idx[q] = h.vbuf[q];
        h.vld(base + VAL + 4 * k, n);
        for (int q = 0; q < n; q++) vs[q] = h.vbuf[q];
        h.vgather(base + X, idx, n);
        for (int q = 0; q < n; q++) acc += vs[q] * h.vbuf[q];
      end
      h.sst(base + Y + 4 * r, acc);
    end
    h.end_run($sformatf("spmv VL=%0d pf=%0d", vl_bits, pf), cycles);
    for (int r = 0; r < R; r++) begin
      acc = 0;
      for (int unsigned k = rp[r]; k < rp[r + 1]; k++)
        acc += h.init_word(base + VAL + 4 * k) * h.init_word(base + X + 4 * cols[k]);
      h.sld(base + Y + 4 * r, y);
      h.check(y == acc, $sformatf("y[%0d]", r));
    end
  endtask

  initial begin
    int c_off, c_on, r;
    rp[0] = 0;
    for (int i = 0; i < R; i++) begin
      int n;
      n = $urandom_range(1, 24);
      for (int k = 0; k < n; k++) cols.push_back($urandom_range(0, C - 1));
      rp[i + 1] = rp[i] + n;
    end
    r = 0;
    for (int v = 0; v < 3; v++) begin
      int vl;
      vl = v == 0 ? 128 : v == 1 ? 512 : 4096;
      run(vl, 0, 32'h1000_0000 * (r++), c_off);
      run(vl, 1, 32'h1000_0000 * (r++), c_on);
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
