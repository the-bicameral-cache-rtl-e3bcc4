// wl_harness - a simple in-order core model around the full-size hierarchy,
// shared by the workload testbenches (tb_wl_*), which call its tasks.
//
// It instantiates bc_top at its default sizes and the behavioural DRAM, and
// plays the part of the processor's memory port:
//   sld/sst : scalar load/store of one 32-bit word;
//   vld/vst : unit-stride vector load/store of n 32-bit words (a vector of VL
//             bits is VL/32 words) between memory and vbuf; split into one
//             reference per 64-byte sector touched, with a byte mask;
//   vgather : indexed vector load, one reference per element;
//   vlds    : strided vector load, one reference per element.
// Every reference is checked against a flat reference memory (the last value
// written, or the DRAM's initial pattern: every word of a never-written sector
// holds the sector's byte address), and native/cross hits against their 1- and
// 2-cycle latencies. start_run resets the hierarchy with prefetch on or off;
// end_run prints the cycle count and event counters of the run.
// The core is blocking, one reference at a time, as the hierarchy requires.
module wl_harness;
  import bc_pkg::*;
  logic clk = 0, rst_n = 0, pf_enable = 0;
  logic req_valid = 0, req_ready, rsp_valid;
  core_req_t req = '0;
  sector_t rsp_data;
  logic dram_en, dram_we;
  addr_t dram_addr;
  sector_t dram_wdata, dram_rdata;
  bc_events_t bc_ev;
  mc_events_t mc_ev;

  int checks = 0, failures = 0, cyc = 0, nref = 0, t_start = 0;
  int cnt [19];
  string names [19] = '{"pf_drop", "pf_fill", "vc_eager", "sc_eager", "vc_forced", "sc_forced",
                        "vc_flag_wb", "sc_evict_wb", "double_miss", "vc_wb_restore",
                        "sc_wb_restore", "vector_xhit", "scalar_xhit", "vc_hit", "sc_hit",
                        "pf_issue", "row_conflict", "row_empty", "row_hit"};
  logic [31:0] vbuf [128];

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

  task automatic start_run(input bit pf);
    @(negedge clk);
    rst_n = 0; pf_enable = pf;
    repeat (3) @(negedge clk);
    foreach (cnt[i]) cnt[i] = 0;
    rst_n = 1;
    t_start = cyc;
  endtask

  task automatic end_run(input string what, output int cycles);
    cycles = cyc - t_start;
    $display("%s: %0d cycles, sc_hit %0d vc_hit %0d scalar_xhit %0d vector_xhit %0d miss %0d pf_fill %0d row_openings %0d",
             what, cycles, cnt[14], cnt[13], cnt[12], cnt[11], cnt[8], cnt[1], cnt[17] + cnt[16]);
  endtask

  // one sector reference, checked
  task automatic ref_op(input addr_t a, input bit vec, input bit we, input be_t be,
                        input sector_t d, output sector_t q);
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
    check(rsp_valid && rsp_data == gold_rd(a), $sformatf("data of %h", a));
    q = rsp_data;
    nref++;
  endtask

  task automatic sld(input addr_t a, output logic [31:0] w);
    sector_t q;
    ref_op({a[31:2], 2'b00}, 0, 0, '0, '0, q);
    w = q[32 * int'(a[5:2]) +: 32];
  endtask

  task automatic sst(input addr_t a, input logic [31:0] w);
    sector_t q, d;
    be_t be;
    d = '0; be = '0;
    d[32 * int'(a[5:2]) +: 32] = w;
    be[4 * int'(a[5:2]) +: 4]  = 4'hf;
    ref_op({a[31:2], 2'b00}, 0, 1, be, d, q);
  endtask

  // unit-stride vector load of n words at a (word aligned)
  task automatic vld(input addr_t a, input int n);
    sector_t q;
    int i;
    i = 0;
    while (i < n) begin
      addr_t wa;
      wa = a + addr_t'(4 * i);
      ref_op({wa[31:6], 6'd0}, 1, 0, '0, '0, q);
      do begin
        wa = a + addr_t'(4 * i);
        vbuf[i] = q[32 * int'(wa[5:2]) +: 32];
        i++;
      end while (i < n && (a + addr_t'(4 * i)) % 64 != 0);
    end
  endtask

  // unit-stride vector store of vbuf[0..n-1] to a (word aligned)
  task automatic vst(input addr_t a, input int n);
    sector_t q, d;
    be_t be;
    int i;
    addr_t sa;
    i = 0;
    while (i < n) begin
      addr_t wa;
      wa = a + addr_t'(4 * i);
      sa = {wa[31:6], 6'd0};
      d = '0; be = '0;
      do begin
        wa = a + addr_t'(4 * i);
        d[32 * int'(wa[5:2]) +: 32] = vbuf[i];
        be[4 * int'(wa[5:2]) +: 4]  = 4'hf;
        i++;
      end while (i < n && (a + addr_t'(4 * i)) % 64 != 0);
      ref_op(sa, 1, 1, be, d, q);
    end
  endtask

  // indexed vector load: element k from base + 4*idx[k]
  task automatic vgather(input addr_t base, input int unsigned idx[], input int n);
    sector_t q;
    for (int k = 0; k < n; k++) begin
      addr_t wa;
      wa = base + addr_t'(4 * idx[k]);
      ref_op({wa[31:6], 6'd0}, 1, 0, '0, '0, q);
      vbuf[k] = q[32 * int'(wa[5:2]) +: 32];
    end
  endtask

  // strided vector load: element k from a + k * stride_bytes, one reference
  // per element
  task automatic vlds(input addr_t a, input int stride_bytes, input int n);
    sector_t q;
    for (int k = 0; k < n; k++) begin
      addr_t wa;
      wa = a + addr_t'(k * stride_bytes);
      ref_op({wa[31:6], 6'd0}, 1, 0, '0, '0, q);
      vbuf[k] = q[32 * int'(wa[5:2]) +: 32];
    end
  endtask

  // initial value of the word at a
  function automatic logic [31:0] init_word(addr_t a);
    return {a[31:6], 6'd0};
  endfunction

  task automatic finish_all();
    $display("%0d references", nref);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
