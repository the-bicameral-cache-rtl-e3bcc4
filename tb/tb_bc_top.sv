// tb_bc_top - end-to-end test of the whole hierarchy at its default sizes
// (64 KB Scalar Cache, 64 KB Vector Cache, 8 DRAM banks) with the behavioural
// DRAM, prefetch on.
// Workload: an axpy-like vector loop, y[i] = f(x[i], y[i]), one sector per
// reference, over two 96 KB arrays (more than the Vector Cache holds), with
// scalar references interleaved: a stack-like region whose 20 lines all fall
// in one Scalar Cache set, scalar reads of y (vector data), occasional vector
// reads of the scalar region, and re-reads of recently evicted y lines. A
// second phase migrates scalar-written sectors of 40 separate 1 KB blocks
// into the Vector Cache while re-reading y.
// Checks: every reference returns the last value written (flat reference
// memory), native hits answer in one cycle and cross hits in two, and every
// mechanism (hits, cross hits, migration, write-buffer restore, eager and
// compulsory emptying, prefetch fill and drop, row hit / empty / conflict)
// occurs at least once.
module tb_bc_top;
  import bc_pkg::*;
  logic clk = 0, rst_n = 0, pf_enable = 1;
  logic req_valid = 0, req_ready, rsp_valid;
  core_req_t req = '0;
  sector_t rsp_data;
  logic dram_en, dram_we;
  addr_t dram_addr;
  sector_t dram_wdata, dram_rdata;
  bc_events_t bc_ev;
  mc_events_t mc_ev;
  int checks = 0, failures = 0, cyc = 0, nref = 0;
  int cnt [19];
  // bit i of {mc_ev, bc_ev}; the first field of a packed struct is its MSB
  string names [19] = '{"pf_drop", "pf_fill", "vc_eager", "sc_eager", "vc_forced", "sc_forced",
                        "vc_flag_wb", "sc_evict_wb", "double_miss", "vc_wb_restore",
                        "sc_wb_restore", "vector_xhit", "scalar_xhit", "vc_hit", "sc_hit",
                        "pf_issue", "row_conflict", "row_empty", "row_hit"};

  bc_top dut (.*);
  dram_model u_dram (.clk, .en(dram_en), .we(dram_we), .addr(dram_addr),
                     .wdata(dram_wdata), .rdata(dram_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) for (int i = 0; i < 19; i++) cnt[i] += int'({mc_ev, bc_ev}[i]);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  function automatic sector_t init_sector(addr_t a);
    return {16{a[31:6], 6'd0}};
  endfunction
  sector_t gold [logic [25:0]];
  function automatic sector_t gold_rd(addr_t a);
    return gold.exists(a[31:6]) ? gold[a[31:6]] : init_sector(a);
  endfunction
  function automatic sector_t rnd_sector();
    sector_t d;
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  // one reference, checked
  task automatic ref_op(input addr_t a, input bit vec, input bit we, input be_t be, input sector_t d,
                        output sector_t q);
    int t0, lat; bit nat, xh;
    @(negedge clk);
    req_valid = 1; req.addr = a; req.vec = vec; req.we = we; req.be = be; req.wdata = d;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    t0 = cyc; nat = bc_ev.sc_hit || bc_ev.vc_hit;
    @(negedge clk); req_valid = 0;
    xh = bc_ev.scalar_xhit;
    while (!rsp_valid && cyc - t0 < 20000) @(negedge clk);
    lat = cyc - t0;
    if (nat) check(lat == 1, $sformatf("native hit latency %0d", lat));
    if (xh)  check(lat == 2, $sformatf("cross hit latency %0d", lat));
    if (we) gold[a[31:6]] = merge_bytes(gold_rd(a), d, be);
    check(rsp_valid && rsp_data == gold_rd(a),
          $sformatf("data of %h (%s %s)", a, vec ? "vector" : "scalar", we ? "write" : "read"));
    q = rsp_data;
    nref++;
  endtask

  localparam addr_t X_BASE   = 32'h0010_0000;
  localparam addr_t Y_BASE   = 32'h0020_0000;
  localparam addr_t STK_BASE = 32'h4000_0040;   // all lines in SC set 1
  localparam int    N_SEC    = 1536;            // 96 KB per array

  initial begin
    sector_t xs, ys, dummy;
    foreach (cnt[i]) cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N_SEC; i++) begin
      addr_t xa, ya;
      xa = X_BASE + addr_t'(64 * i);
      ya = Y_BASE + addr_t'(64 * i);
      ref_op(xa, 1, 0, '0, '0, xs);
      ref_op(ya, 1, 0, '0, '0, ys);
      ref_op(ya, 1, 1, '1, xs ^ {ys[510:0], ys[511]}, dummy);
      // scalar work on a crowded "stack" set
      if (i % 2 == 0)
        ref_op(STK_BASE + addr_t'(32'h4000 * $urandom_range(0, 19)), 0,
               $urandom_range(0, 1), 64'($urandom) | 64'h1, rnd_sector(), dummy);
      // scalar read of vector data just written
      if (i % 16 == 5) ref_op(ya, 0, 0, '0, '0, dummy);
      // vector read of scalar data
      if (i % 64 == 33)
        ref_op(STK_BASE + addr_t'(32'h4000 * $urandom_range(0, 11)), 1, 0, '0, '0, dummy);
      // re-reference a y line evicted a while ago
      if (i % 8 == 7 && i > 700)
        ref_op(Y_BASE + addr_t'(64 * (i - $urandom_range(500, 700))), 1, 0, '0, '0, dummy);
    end
    // phase 2: scalar stores to 40 lines in distinct 1 KB blocks, then vector
    // reads of them: each migrates a sector into a new VC line without a
    // demand read, so dirty VC victims pile up in the write buffer; random
    // vector reads of recent y lines meanwhile find some of them there
    for (int k = 0; k < 40; k++)
      ref_op(32'h0080_0000 + addr_t'(k * 1024 + 64 * (k % 16)), 0, 1, '1, rnd_sector(), dummy);
    for (int k = 0; k < 40; k++) begin
      ref_op(32'h0080_0000 + addr_t'(k * 1024 + 64 * (k % 16)), 1, 0, '0, '0, dummy);
      ref_op(Y_BASE + addr_t'(64 * (N_SEC - $urandom_range(1, 1100))), 1, 0, '0, '0, dummy);
    end
    $display("%0d references in %0d cycles", nref, cyc);
    foreach (cnt[i]) begin
      $display("%-14s %0d", names[i], cnt[i]);
      check(cnt[i] > 0, $sformatf("mechanism %s occurred", names[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
