// tb_wl_pathfinder - the pathfinder dynamic programme on the full-size
// hierarchy through wl_harness: a stride-1 workload. Row by row,
// dst[j] = wall[r][j] + min(src[j-1], src[j], src[j+1]) (unsigned 32-bit,
// the edges clamped), then src and dst swap. Per strip of VL bits: a vector
// load of the wall row, three vector loads of src (two of them unaligned)
// and a vector store of dst. Vector lengths 128, 512 and 4096 bits, prefetch off
// and on.
// Checks: every reference (in the harness), the final row against the same
// computation on testbench arrays from the initial memory pattern, and that
// prefetching fills sectors.
// Size: 32 rows x 1024 columns (128 KB of wall) rather than 4096 x 4096.
module tb_wl_pathfinder;
  wl_harness h ();
  localparam int ROWS = 32;
  localparam int COLS = 1024;
  localparam logic [31:0] WALL = 32'h0040_0000, BUF0 = 32'h0010_0000, BUF1 = 32'h0020_0000;

  function automatic logic [31:0] min3(logic [31:0] a, b, c);
    logic [31:0] m;
    m = a < b ? a : b;
    return m < c ? m : c;
  endfunction

  logic [31:0] gsrc [COLS];
  logic [31:0] gdst [COLS];

  task automatic run(input int vl_bits, input bit pf, input logic [31:0] base, output int cycles);
    logic [31:0] w [128];
    logic [31:0] l [128];
    logic [31:0] c [128];
    logic [31:0] src, dst;
    int nw;
    nw = vl_bits / 32;
    h.start_run(pf);
    for (int r = 1; r < ROWS; r++) begin
      src = base + ((r % 2) ? BUF0 : BUF1);
      dst = base + ((r % 2) ? BUF1 : BUF0);
      // row 0 of the wall is the starting cost, kept in BUF0 as it is
      if (r == 1) src = base + WALL;
      for (int j = 0; j < COLS; j += nw) begin
        h.vld(base + WALL + 4 * (r * COLS + j), nw);
        for (int q = 0; q < nw; q++) w[q] = h.vbuf[q];
        h.vld(src + 4 * j, nw);
        for (int q = 0; q < nw; q++) c[q] = h.vbuf[q];
        // left neighbours (clamped at column 0)
        if (j == 0) begin
          h.vld(src, nw - 1);
          for (int q = nw - 1; q > 0; q--) h.vbuf[q] = h.vbuf[q - 1];
          h.vbuf[0] = c[0];
        end else h.vld(src + 4 * (j - 1), nw);
        for (int q = 0; q < nw; q++) l[q] = h.vbuf[q];
        // right neighbours (clamped at the last column)
        if (j + nw == COLS) begin
          h.vld(src + 4 * (j + 1), nw - 1);
          h.vbuf[nw - 1] = c[nw - 1];
        end else h.vld(src + 4 * (j + 1), nw);
        for (int q = 0; q < nw; q++) h.vbuf[q] = w[q] + min3(l[q], c[q], h.vbuf[q]);
        h.vst(dst + 4 * j, nw);
      end
    end
    h.end_run($sformatf("pathfinder VL=%0d pf=%0d", vl_bits, pf), cycles);
    for (int j = 0; j < COLS; j++) gsrc[j] = h.init_word(base + WALL + 4 * j);
    for (int r = 1; r < ROWS; r++) begin
      for (int j = 0; j < COLS; j++)
        gdst[j] = h.init_word(base + WALL + 4 * (r * COLS + j)) +
                  min3(gsrc[j > 0 ? j - 1 : 0], gsrc[j], gsrc[j < COLS - 1 ? j + 1 : j]);
      gsrc = gdst;
    end
    for (int j = 0; j < COLS; j += 128) begin
      h.vld(base + (((ROWS - 1) % 2) ? BUF1 : BUF0) + 4 * j, 128);
      for (int q = 0; q < 128; q++) h.check(h.vbuf[q] == gsrc[j + q], $sformatf("result[%0d]", j + q));
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
