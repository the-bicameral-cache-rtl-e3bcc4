// tb_mem_ctrl - memory controller with the behavioural DRAM.
//  1. latency: with prefetch off, the response to a read to a closed bank is
//     valid RAS+CAS+3 cycles after the cycle the request was accepted in, to
//     the open row CAS+3, to another row of the same bank PRE+RAS+CAS+3 (the
//     3 are the queue write, the bank start and the data port).
//  2. prefetch: after one Vector Cache read of sector 0 of a line, with the
//     controller otherwise idle, the 15 following sectors of that line come
//     back as prefetches, each a row hit, and nothing beyond the line.
//  2b. a write accepted while the prefetch of the same sector is in service
//     makes that prefetch disappear instead of returning stale data, and,
//     the write being the bank's last operation, ends the prefetch walk.
//  2c. a demand read of a sector whose prefetch is in service is served by
//      that prefetch: one response, flagged as demand, within CAS+3 cycles,
//      and no separate prefetch response for that sector.
//  3. random writes and reads, prefetch on, random back-pressure: every
//     demand response carries the data of the last write accepted before the
//     read, and every prefetch response carries the current memory data (no
//     stale prefetch passes a write).
module tb_mem_ctrl;
  import bc_pkg::*;
  logic clk = 0, rst_n = 0, pf_enable = 0;
  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  mem_req_t req = '0;
  mem_rsp_t rsp;
  logic dram_en, dram_we;
  addr_t dram_addr;
  sector_t dram_wdata, dram_rdata;
  mc_events_t ev;
  int checks = 0, failures = 0, cyc = 0;
  int n_hit = 0, n_conf = 0, n_empty = 0, n_pf = 0, n_pf_rsp = 0, n_dem = 0;

  mem_ctrl dut (.*);
  dram_model u_dram (.clk, .en(dram_en), .we(dram_we), .addr(dram_addr),
                     .wdata(dram_wdata), .rdata(dram_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      n_hit += int'(ev.row_hit); n_conf += int'(ev.row_conflict);
      n_empty += int'(ev.row_empty); n_pf += int'(ev.pf_issue);
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  function automatic sector_t init_sector(addr_t a);
    return {16{a[31:6], 6'd0}};
  endfunction

  // golden memory
  sector_t gold [logic [25:0]];
  function automatic sector_t gold_rd(addr_t a);
    return gold.exists(a[31:6]) ? gold[a[31:6]] : init_sector(a);
  endfunction

  // issue one request; returns once it is accepted
  task automatic send(input addr_t a, input bit we, input bit vec, input sector_t d);
    @(negedge clk);
    req_valid = 1; req = '0; req.addr = a; req.we = we; req.vec = vec; req.data = d;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
  endtask

  function automatic addr_t mk(int row, int bank, int col);
    return {15'(row), 3'(bank), 8'(col), 6'd0};
  endfunction

  task automatic lat_read(input addr_t a, input int exp);
    int t0;
    @(negedge clk);
    req_valid = 1; req = '0; req.addr = a; req.vec = 0;
    t0 = cyc;
    @(posedge clk); #1 req_valid = 0;
    while (!rsp_valid) begin @(posedge clk); #1; end
    check(cyc - t0 == exp, $sformatf("read latency %0d expected %0d", cyc - t0, exp));
    check(rsp.addr == a && !rsp.pf && rsp.data == gold_rd(a), "read data");
    @(negedge clk);
  endtask

  sector_t exp_q [logic [25:0]][$];
  int outstanding;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- 1. latency
    lat_read(mk(3, 2, 5), 28 + 11 + 3);
    lat_read(mk(3, 2, 9), 11 + 3);
    lat_read(mk(4, 2, 9), 11 + 28 + 11 + 3);
    lat_read(mk(9, 5, 0), 28 + 11 + 3);
    check(n_empty == 2 && n_hit == 1 && n_conf == 1, "row state classification");

    // ---- 2. prefetch walk along one Vector Cache line
    pf_enable = 1;
    begin
      addr_t base; int got; int hits0;
      base = mk(20, 6, 32);               // column 32 = first sector of a 1 KB line
      hits0 = n_hit;
      send(base, 0, 1, '0);
      got = 0;
      repeat (2000) begin
        @(posedge clk); #1;
        if (rsp_valid) begin
          if (rsp.pf) begin
            got++;
            check(rsp.addr == base + addr_t'(64 * got), $sformatf("prefetch %0d address", got));
            check(rsp.data == gold_rd(rsp.addr), "prefetch data");
          end else check(rsp.addr == base, "demand response");
        end
      end
      check(got == 15, $sformatf("%0d prefetches, expected 15", got));
      check(n_hit - hits0 == 15, "prefetches are row hits");
    end

    // ---- 2b. a write to a sector whose prefetch is under way: the prefetched
    //      copy must not be delivered
    begin
      addr_t base; int got, stale_seen; sector_t d;
      base = mk(21, 7, 64);
      send(base, 0, 1, '0);
      while (!rsp_valid) begin @(posedge clk); #1; end
      d = {16{32'hdead_beef}};
      send(base + 64, 1, 1, d);           // prefetch of sector 1 is in service
      gold[(base + 64) >> 6] = d;
      got = 0; stale_seen = 0;
      repeat (600) begin
        @(posedge clk); #1;
        if (rsp_valid && rsp.pf) begin
          got++;
          check(rsp.data == gold_rd(rsp.addr), $sformatf("prefetch of %h after a write", rsp.addr));
        end
      end
      // the write is now the bank's last operation, so the walk stops there
      check(got == 0, $sformatf("%0d prefetches after the write, expected 0", got));
    end

    // ---- 2c. demand read merged into the prefetch of the same sector
    begin
      addr_t base; int t0, n_dem_s1, n_pf_s1, lat;
      base = mk(22, 4, 128);
      send(base, 0, 1, '0);
      while (!(rsp_valid && !rsp.pf)) begin @(posedge clk); #1; end
      repeat (3) @(posedge clk);          // the prefetch of sector 1 is now in its bank
      @(negedge clk);
      req_valid = 1; req = '0; req.addr = base + 64; req.vec = 1;
      t0 = cyc;
      @(posedge clk); #1 req_valid = 0;
      n_dem_s1 = 0; n_pf_s1 = 0; lat = 0;
      repeat (400) begin
        if (rsp_valid && rsp.addr == base + 64) begin
          if (rsp.pf) n_pf_s1++;
          else begin n_dem_s1++; lat = cyc - t0; end
          check(rsp.data == gold_rd(base + 64), "merged read data");
        end
        @(posedge clk); #1;
      end
      check(n_dem_s1 == 1 && n_pf_s1 == 0,
            $sformatf("merged read: %0d demand and %0d prefetch responses", n_dem_s1, n_pf_s1));
      check(lat > 0 && lat <= 11 + 3, $sformatf("merged read latency %0d", lat));
    end

    // ---- 3. random traffic
    outstanding = 0;
    fork
      begin
        for (int i = 0; i < 3000; i++) begin
          addr_t a; bit we; sector_t d;
          a  = mk($urandom_range(0, 2), $urandom_range(0, 3), $urandom_range(0, 47));
          we = ($urandom_range(0, 2) == 0);
          for (int k = 0; k < 16; k++) d[k*32 +: 32] = $urandom;
          @(negedge clk);
          req_valid = 1; req = '0; req.addr = a; req.we = we; req.vec = $urandom_range(0, 1); req.data = d;
          @(posedge clk);
          while (!req_ready) @(posedge clk);
          // accepted at this edge
          if (we) gold[a[31:6]] = d;
          else begin exp_q[a[31:6]].push_back(gold_rd(a)); outstanding++; end
          #1 req_valid = 0;
          repeat ($urandom_range(0, 6)) @(negedge clk);
        end
      end
      begin
        int idle;
        idle = 0;
        while (idle < 500) begin
          @(negedge clk);
          rsp_ready = ($urandom_range(0, 3) != 0);
          #1;
          if (rsp_valid && rsp_ready) begin
            idle = 0;
            if (rsp.pf) begin
              n_pf_rsp++;
              check(rsp.data == gold_rd(rsp.addr), $sformatf("prefetch of %h is not stale", rsp.addr));
            end else begin
              n_dem++;
              check(exp_q[rsp.addr[31:6]].size() > 0, "response to a request");
              if (exp_q[rsp.addr[31:6]].size() > 0)
                check(rsp.data == exp_q[rsp.addr[31:6]].pop_front(), "demand data in order");
              outstanding--;
            end
          end else idle++;
        end
      end
    join
    rsp_ready = 1;
    check(outstanding == 0, "every read answered");
    $display("row hit %0d empty %0d conflict %0d pf issued %0d pf rsp %0d demand %0d",
             n_hit, n_empty, n_conf, n_pf, n_pf_rsp, n_dem);
    check(n_pf_rsp > 50 && n_conf > 50, "prefetches and row conflicts in random traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
