// tb_wl_blackscholes - the memory behaviour of the blackscholes kernel on the
// full-size hierarchy through wl_harness: a stride-1 workload with many
// streams. Per strip of VL bits of options: vector loads of five input arrays
// (spot price, strike, rate, volatility, time) and a vector store of the
// price, plus scalar loads of two constants. The pricing formula itself is
// floating point; here an integer stand-in, p = s*t + k*r - v + c0 - c1,
// gives every output a checkable value.
// Vector lengths 128, 512 and 4096 bits, prefetch off and on.
// Checks: every reference (in the harness), every price against the
// stand-in computed from the initial memory pattern, and that prefetching
// fills sectors.
// Size: 8192 options (6 arrays of 32 KB) rather than 131072.
module tb_wl_blackscholes;
  wl_harness h ();
  localparam int N = 8192;
  localparam logic [31:0] ARR [6] = '{32'h0010_0000, 32'h0018_0000, 32'h0020_0000,
                                      32'h0028_0000, 32'h0030_0000, 32'h0038_0000};
  localparam logic [31:0] CONST = 32'h0300_0000;

  function automatic logic [31:0] price(logic [31:0] s, k, r, v, t, c0, c1);
    return s * t + k * r - v + c0 - c1;
  endfunction

  task automatic run(input int vl_bits, input bit pf, input logic [31:0] base, output int cycles);
    logic [31:0] in [5][128];
    logic [31:0] c0, c1;
    int nw;
    nw = vl_bits / 32;
    h.start_run(pf);
    for (int i = 0; i < N; i += nw) begin
      h.sld(base + CONST, c0);
      h.sld(base + CONST + 4, c1);
      for (int a = 0; a < 5; a++) begin
        h.vld(base + ARR[a] + 4 * i, nw);
        for (int q = 0; q < nw; q++) in[a][q] = h.vbuf[q];
      end
      for (int q = 0; q < nw; q++)
        h.vbuf[q] = price(in[0][q], in[1][q], in[2][q], in[3][q], in[4][q], c0, c1);
      h.vst(base + ARR[5] + 4 * i, nw);
    end
    h.end_run($sformatf("blackscholes VL=%0d pf=%0d", vl_bits, pf), cycles);
    for (int i = 0; i < N; i += 128) begin
      h.vld(base + ARR[5] + 4 * i, 128);
      for (int q = 0; q < 128; q++) begin
        logic [31:0] e [5];
        for (int a = 0; a < 5; a++) e[a] = h.init_word(base + ARR[a] + 4 * (i + q));
        h.check(h.vbuf[q] == price(e[0], e[1], e[2], e[3], e[4], h.init_word(base + CONST),
                                   h.init_word(base + CONST + 4)), $sformatf("price[%0d]", i + q));
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
