// tb_bicameral_cache - the cache controller with small caches (4 x 4-way SC,
// 8-line VC, 4-line write buffers) so that evictions, write-buffer traffic
// and migrations are frequent. Memory is a testbench model that answers
// demand reads after a random delay, accepts write-backs with random
// back-pressure, and injects prefetch responses for sectors next to recent
// vector references, as the memory controller would.
// Checks: every read returns the last value written (a flat reference
// memory), a native hit answers one cycle after acceptance and a cross hit two
// cycles after, and every mechanism of the cache occurs.
module tb_bicameral_cache;
  import bc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, rsp_valid;
  core_req_t req = '0;
  sector_t rsp_data;
  logic mreq_valid, mreq_ready = 0, mrsp_valid = 0, mrsp_ready;
  mem_req_t mreq;
  mem_rsp_t mrsp = '0;
  bc_events_t ev;
  int checks = 0, failures = 0, cyc = 0;
  int cnt [15];
  string names [15] = '{"pf_drop", "pf_fill", "vc_eager", "sc_eager", "vc_forced", "sc_forced",
                        "vc_flag_wb", "sc_evict_wb", "double_miss", "vc_wb_restore",
                        "sc_wb_restore", "vector_xhit", "scalar_xhit", "vc_hit", "sc_hit"};

  bicameral_cache #(.SC_SETS(4), .SC_WAYS(4), .SC_WB_LINES(4), .SC_WB_THRESH(4),
                    .VC_LINES(8), .VC_SECTORS(16), .VC_WB_LINES(4), .VC_WB_THRESH(3))
    dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  function automatic sector_t init_sector(addr_t a);
    return {16{a[31:6], 6'd0}};
  endfunction

  sector_t dram [logic [25:0]];   // memory image behind the cache
  sector_t gold [logic [25:0]];   // what the core must see
  function automatic sector_t rd(ref sector_t m [logic [25:0]], input addr_t a);
    return m.exists(a[31:6]) ? m[a[31:6]] : init_sector(a);
  endfunction

  // ---- memory model
  bit    dem_pend;
  addr_t dem_addr;
  int    dem_delay;
  addr_t last_vec;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) for (int i = 0; i < 15; i++) cnt[i] += int'(ev[i]);
    if (mreq_valid && mreq_ready) begin
      if (mreq.we) dram[mreq.addr[31:6]] = mreq.data;
      else begin
        check(!dem_pend, "one demand read at a time");
        dem_pend = 1; dem_addr = mreq.addr; dem_delay = $urandom_range(2, 20);
      end
    end
  end
  always @(negedge clk) begin
    mreq_ready = ($urandom_range(0, 3) != 0);
    mrsp_valid = 0;
    mrsp = '0;
    if (dem_pend && --dem_delay <= 0) begin
      mrsp_valid = 1; mrsp.addr = dem_addr; mrsp.data = rd(dram, dem_addr);
      dem_pend = 0;
    end else if ($urandom_range(0, 5) == 0) begin
      addr_t a;
      a = last_vec + addr_t'(64 * $urandom_range(1, 3));
      mrsp_valid = 1; mrsp.pf = 1; mrsp.addr = {a[31:6], 6'd0}; mrsp.data = rd(dram, a);
    end
  end

  // ---- core
  initial begin
    dem_pend = 0; last_vec = '0;
    foreach (cnt[i]) cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 6000; it++) begin
      core_req_t r; int t0, lat; bit nat, xh;
      r = '0;
      r.vec = $urandom_range(0, 1);
      if (r.vec) r.addr = {16'd0, 6'($urandom_range(0, 19)), 4'($urandom), 6'd0};
      else if ($urandom_range(0, 3) == 0)
        r.addr = {16'd0, 6'($urandom_range(0, 19)), 4'($urandom), 6'd0};   // vector data
      else
        r.addr = {16'd1, 6'($urandom_range(0, 15)), 2'd0, 2'($urandom), 6'd0};
      r.we = ($urandom_range(0, 2) == 0);
      r.be = {$urandom, $urandom};
      for (int k = 0; k < 16; k++) r.wdata[k*32 +: 32] = $urandom;
      if (r.vec) last_vec = r.addr;
      @(negedge clk);
      req_valid = 1; req = r;
      #1;
      while (!req_ready) begin @(negedge clk); #1; end
      t0 = cyc; nat = ev.sc_hit || ev.vc_hit;
      @(negedge clk); req_valid = 0;
      xh = ev.scalar_xhit;
      while (!rsp_valid && cyc - t0 < 5000) @(negedge clk);
      lat = cyc - t0;
      if (nat) check(lat == 1, $sformatf("native hit latency %0d", lat));
      if (xh)  check(lat == 2, $sformatf("cross hit latency %0d", lat));
      if (r.we) gold[r.addr[31:6]] = merge_bytes(rd(gold, r.addr), r.wdata, r.be);
      check(rsp_data == rd(gold, r.addr),
            $sformatf("data of %h (%s %s)", r.addr, r.vec ? "vector" : "scalar", r.we ? "write" : "read"));
    end
    foreach (cnt[i]) begin
      $display("%-14s %0d", names[i], cnt[i]);
      check(cnt[i] > 0, $sformatf("mechanism %s occurred", names[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
