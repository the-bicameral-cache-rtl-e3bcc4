// tb_scalar_cache - drives the Scalar Cache as its controller would (lookup,
// access, invalidate, victim eviction, fill) with random references crowded
// into a few sets, and compares hits, data, dirty bits and the chosen victims
// with a reference model that keeps each set's ways in recency order.
module tb_scalar_cache;
  import bc_pkg::*;
  localparam int SETS = 256, WAYS = 4;
  logic clk = 0, rst_n = 0;
  addr_t   addr = '0;
  logic    hit, hit_dirty, vic_valid, vic_dirty;
  logic [1:0] hit_way, vic_way;
  sector_t hit_data, vic_data;
  addr_t   vic_addr;
  logic    acc_en = 0, acc_we = 0, inv_en = 0, vinv_en = 0, fill_en = 0, fill_dirty = 0;
  be_t     acc_be = '0;
  sector_t acc_wdata = '0, fill_data = '0;
  logic [1:0] fill_way = '0;
  int checks = 0, failures = 0, n_hit = 0, n_evict = 0, n_inv = 0;

  scalar_cache dut (.*);

  always #5 clk = ~clk;

  // reference: per set, lines with tag/data/dirty and a recency list
  addr_t   m_addr [SETS][WAYS];
  logic    m_val  [SETS][WAYS];
  logic    m_dirty[SETS][WAYS];
  sector_t m_data [SETS][WAYS];
  int      order  [SETS][$];   // most recent first

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic void touch(int s, int w);
    foreach (order[s][i]) if (order[s][i] == w) begin order[s].delete(i); break; end
    order[s].push_front(w);
  endfunction

  function automatic sector_t rnd_sector();
    sector_t d;
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  initial begin
    for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) m_val[s][w] = 0;
    for (int s = 0; s < SETS; s++) for (int w = WAYS - 1; w >= 0; w--) order[s].push_back(WAYS-1-w);
    // reset ages are 0..3 by way: way 0 most recent
    for (int s = 0; s < SETS; s++) begin
      order[s].delete();
      for (int w = 0; w < WAYS; w++) order[s].push_back(w);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int s, mw; bit mh;
      @(negedge clk);
      acc_en = 0; inv_en = 0; vinv_en = 0; fill_en = 0;
      s    = $urandom_range(0, 3) * 85;                   // sets 0, 85, 170, 255
      addr = {14'($urandom_range(0, 6)), 4'($urandom), 8'(s), 6'($urandom)};
      addr[31:18] = '0;
      addr[17:14] = 4'($urandom_range(0, 6));
      #1;
      mh = 0; mw = 0;
      for (int w = 0; w < WAYS; w++)
        if (m_val[s][w] && m_addr[s][w][31:6] == addr[31:6]) begin mh = 1; mw = w; end
      check(hit == mh, $sformatf("hit %0b expected %0b at %h", hit, mh, addr));
      if (mh && hit) begin
        n_hit++;
        check(int'(hit_way) == mw, "hit way");
        check(hit_data == m_data[s][mw], "hit data");
        check(hit_dirty == m_dirty[s][mw], "hit dirty");
        if ($urandom_range(0, 9) == 0) begin
          inv_en = 1; m_val[s][mw] = 0; n_inv++;
        end else begin
          acc_en = 1; acc_we = $urandom_range(0, 1);
          acc_be = {$urandom, $urandom}; acc_wdata = rnd_sector();
          if (acc_we) begin
            m_data[s][mw] = merge_bytes(m_data[s][mw], acc_wdata, acc_be);
            m_dirty[s][mw] = 1;
          end
          touch(s, mw);
        end
      end else if (!mh) begin
        // expected victim: first invalid way, else least recent
        int ev_w; bit inv_found;
        inv_found = 0; ev_w = 0;
        for (int w = 0; w < WAYS; w++) if (!inv_found && !m_val[s][w]) begin inv_found = 1; ev_w = w; end
        if (!inv_found) ev_w = order[s][$];
        check(int'(vic_way) == ev_w, $sformatf("victim way %0d expected %0d", vic_way, ev_w));
        check(vic_valid == m_val[s][ev_w], "victim valid");
        if (m_val[s][ev_w]) begin
          check(vic_dirty == m_dirty[s][ev_w], "victim dirty");
          check(vic_addr == {m_addr[s][ev_w][31:6], 6'd0}, "victim address");
          check(vic_data == m_data[s][ev_w], "victim data");
        end
        if (vic_valid && vic_dirty) begin
          // evict first (as the controller does), then fill next cycle
          n_evict++;
          vinv_en = 1; m_val[s][ev_w] = 0;
          @(negedge clk); vinv_en = 0;
          #1 check(!vic_valid && int'(vic_way) == ev_w, "evicted way now free");
        end
        fill_en = 1; fill_way = 2'(ev_w); fill_data = rnd_sector(); fill_dirty = $urandom_range(0, 1);
        m_val[s][ev_w] = 1; m_addr[s][ev_w] = addr; m_data[s][ev_w] = fill_data;
        m_dirty[s][ev_w] = fill_dirty;
        touch(s, ev_w);
      end
    end
    @(negedge clk); acc_en = 0; inv_en = 0; vinv_en = 0; fill_en = 0;
    check(n_hit > 500 && n_evict > 100 && n_inv > 20, "all operations exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
