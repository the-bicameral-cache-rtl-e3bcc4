// tb_wl_lavamd - the memory behaviour of the lavaMD kernel on the full-size
// hierarchy through wl_harness: a non-stride-1 workload. Particles are stored
// as records of four 32-bit words (x, y, z, charge) grouped in boxes; for each
// home particle, the interactions with every particle of its own and the two
// neighbouring boxes are computed with strided vector loads (stride 16 bytes,
// one reference per element) of the neighbours' x and charge, after scalar
// loads of the home particle's x; the result is stored with a scalar store.
// The force formula is floating point; an integer stand-in,
// f_i = sum over j of (x_i * x_j + q_j), gives every result a checkable value.
// Vector lengths 128, 512 and 4096 bits, prefetch off and on.
// Checks: every reference (in the harness) and every f_i against the stand-in
// computed from the initial memory pattern.
// Size: 8 boxes of 32 particles (256 particles) rather than 8192.
module tb_wl_lavamd;
  wl_harness h ();
  localparam int BOXES = 8;
  localparam int PPB   = 32;
  localparam logic [31:0] PART = 32'h0010_0000, FORCE = 32'h0020_0000;

  function automatic logic [31:0] part_addr(logic [31:0] base, int p, int field);
    return base + PART + 32'(16 * p + 4 * field);
  endfunction

  task automatic run(input int vl_bits, input bit pf, input logic [31:0] base, output int cycles);
    logic [31:0] xi, acc, xs [128];
    int nw;
    nw = vl_bits / 32;
    h.start_run(pf);
    for (int b = 0; b < BOXES; b++)
      for (int i = 0; i < PPB; i++) begin
        h.sld(part_addr(base, b * PPB + i, 0), xi);
        acc = 0;
        for (int d = -1; d <= 1; d++) begin
          int nb;
          nb = (b + d + BOXES) % BOXES;
          for (int j = 0; j < PPB; j += nw) begin
            int n;
            n = (PPB - j) < nw ? (PPB - j) : nw;
            h.vlds(part_addr(base, nb * PPB + j, 0), 16, n);
            for (int q = 0; q < n; q++) xs[q] = h.vbuf[q];
            h.vlds(part_addr(base, nb * PPB + j, 3), 16, n);
            for (int q = 0; q < n; q++) acc += xi * xs[q] + h.vbuf[q];
          end
        end
        h.sst(base + FORCE + 4 * (b * PPB + i), acc);
      end
    h.end_run($sformatf("lavaMD VL=%0d pf=%0d", vl_bits, pf), cycles);
    for (int b = 0; b < BOXES; b++)
      for (int i = 0; i < PPB; i++) begin
        logic [31:0] e, f, x0;
        x0 = h.init_word(part_addr(base, b * PPB + i, 0));
        e = 0;
        for (int d = -1; d <= 1; d++)
          for (int j = 0; j < PPB; j++) begin
            int p;
            p = ((b + d + BOXES) % BOXES) * PPB + j;
            e += x0 * h.init_word(part_addr(base, p, 0)) + h.init_word(part_addr(base, p, 3));
          end
        h.sld(base + FORCE + 4 * (b * PPB + i), f);
        h.check(f == e, $sformatf("f[%0d]", b * PPB + i));
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
