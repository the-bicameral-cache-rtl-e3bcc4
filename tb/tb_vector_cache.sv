// tb_vector_cache - drives the Vector Cache as its controller would, with
// random vector references over more lines than the cache holds, and checks
// it cycle by cycle against a reference model: sector hits and data, line
// presence, victim choice (free line first, else least recent regular line),
// the embedded write buffer (flagging, restore on reference, write-buffer
// order) and the write-back engine (oldest line, valid dirty sectors in
// ascending order, one per accepted request, line freed at the end).
module tb_vector_cache;
  import bc_pkg::*;
  localparam int L = 64, S = 16, WBL = 8;
  logic clk = 0, rst_n = 0;
  addr_t   addr = '0, wb_addr;
  logic    line_hit, line_wb, hit, hit_dirty, vic_free, vic_dirty, draining, wb_valid;
  logic [5:0] line_idx, vic_line, fill_line = '0, alloc_line, flag_line;
  sector_t hit_data, fill_data = '0, acc_wdata = '0, wb_data;
  logic    acc_en = 0, acc_we = 0, fill_en = 0, fill_dirty = 0, fill_touch = 0;
  logic    alloc_en = 0, flag_wb_en = 0, drain_start = 0, wb_ready = 0;
  be_t     acc_be = '0;
  logic [3:0] wb_count;
  int checks = 0, failures = 0;
  int n_hit = 0, n_fill = 0, n_alloc = 0, n_flag = 0, n_restore = 0, n_wsec = 0, n_free = 0, n_wait = 0;

  assign alloc_line = vic_line;
  assign flag_line  = vic_line;

  vector_cache dut (.*);

  always #5 clk = ~clk;

  // reference model
  logic            m_alloc[L], m_wb[L];
  logic [21:0]     m_tag[L];
  logic [S-1:0]    m_sv[L], m_sd[L];
  sector_t         m_data[L][S];
  int              order[$];     // most recent first
  int              wbq[$];       // oldest first
  bit              e_active;
  int              e_line;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic void touch(int l);
    foreach (order[i]) if (order[i] == l) begin order.delete(i); break; end
    order.push_front(l);
  endfunction
  function automatic void wb_remove(int l);
    foreach (wbq[i]) if (wbq[i] == l) begin wbq.delete(i); break; end
    m_wb[l] = 0;
  endfunction
  function automatic sector_t rnd_sector();
    sector_t d;
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  initial begin
    for (int l = 0; l < L; l++) begin
      m_alloc[l] = 0; m_wb[l] = 0; m_sv[l] = 0; m_sd[l] = 0; order.push_back(l);
    end
    e_active = 0; e_line = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      int ml, sec, vl, es; bit mhit, ctrl, live, any, exp_v, done, vfree, vdirty;
      @(negedge clk);
      acc_en = 0; fill_en = 0; alloc_en = 0; flag_wb_en = 0; drain_start = 0;
      addr = {22'($urandom_range(0, 79)), 4'($urandom), 6'($urandom)};
      sec  = int'(addr[9:6]);
      #1;
      ml = -1;
      for (int l = 0; l < L; l++) if (m_alloc[l] && m_tag[l] == addr[31:10]) ml = l;
      mhit = (ml >= 0) && m_sv[ml][sec];
      check(line_hit == (ml >= 0), "line presence");
      check(hit == mhit, "sector hit");
      check(int'(wb_count) == wbq.size(), "write-buffer occupancy");
      if (ml >= 0) check(int'(line_idx) == ml && line_wb == m_wb[ml], "line index and WB flag");
      if (mhit) check(hit_data == m_data[ml][sec] && hit_dirty == m_sd[ml][sec], "sector data and dirty bit");
      // expected victim
      vfree = 0; vl = 0;
      for (int l = 0; l < L; l++) if (!vfree && !m_alloc[l]) begin vfree = 1; vl = l; end
      if (!vfree) for (int i = order.size() - 1; i >= 0; i--) if (!m_wb[order[i]]) begin vl = order[i]; break; end
      vdirty = !vfree && m_sd[vl] != 0;
      check(vic_free == vfree && int'(vic_line) == vl && vic_dirty == vdirty,
            $sformatf("victim %0d/%0b expected %0d/%0b", vic_line, vic_free, vl, vfree));

      // controller operation for this cycle
      if (mhit) begin
        acc_en = 1; acc_we = $urandom_range(0, 1); acc_be = {$urandom, $urandom}; acc_wdata = rnd_sector();
      end else if (ml >= 0) begin
        fill_en = 1; fill_line = 6'(ml); fill_data = rnd_sector();
        fill_dirty = $urandom_range(0, 1); fill_touch = $urandom_range(0, 1);
      end else if (vfree || !vdirty) begin
        alloc_en = 1;
      end else if (wbq.size() < WBL) begin
        flag_wb_en = 1;
      end else begin
        drain_start = 1; n_wait++;
      end
      if ($urandom_range(0, 7) == 0) drain_start = 1;
      wb_ready = $urandom_range(0, 1);
      #1;

      // write-back engine model (state before the edge)
      ctrl = acc_en || fill_en || alloc_en || flag_wb_en;
      live = e_active && m_wb[e_line];
      any = 0; es = 0;
      if (live) for (int s = S - 1; s >= 0; s--) if (m_sv[e_line][s] && m_sd[e_line][s]) begin any = 1; es = s; end
      exp_v = live && any && !ctrl;
      done  = live && !any && !ctrl;
      check(wb_valid == exp_v, $sformatf("wb_valid %0b expected %0b", wb_valid, exp_v));
      if (exp_v && wb_valid)
        check(wb_addr == {m_tag[e_line], 4'(es), 6'd0} && wb_data == m_data[e_line][es],
              "written-back sector");

      // model update at the edge: engine first, then the controller operation
      if (exp_v && wb_ready) begin m_sd[e_line][es] = 0; n_wsec++; end
      if (!e_active) begin
        if (drain_start && wbq.size() > 0) begin e_active = 1; e_line = wbq[0]; end
      end else if (!m_wb[e_line] || done) e_active = 0;
      if (done) begin
        m_alloc[e_line] = 0; m_sv[e_line] = 0; wb_remove(e_line); n_free++;
      end
      if (acc_en) begin
        n_hit++;
        if (m_wb[ml]) begin wb_remove(ml); n_restore++; end
        touch(ml);
        if (acc_we) begin
          m_data[ml][sec] = merge_bytes(m_data[ml][sec], acc_wdata, acc_be);
          m_sd[ml][sec] = 1;
        end
      end
      if (fill_en) begin
        n_fill++;
        if (m_wb[ml]) begin wb_remove(ml); n_restore++; end
        if (fill_touch) touch(ml);
        m_data[ml][sec] = fill_data; m_sv[ml][sec] = 1; m_sd[ml][sec] = fill_dirty;
      end
      if (alloc_en) begin
        n_alloc++;
        m_alloc[vl] = 1; m_tag[vl] = addr[31:10]; m_sv[vl] = 0; m_sd[vl] = 0; m_wb[vl] = 0;
        touch(vl);
      end
      if (flag_wb_en) begin
        n_flag++; m_wb[vl] = 1; wbq.push_back(vl);
      end
    end
    $display("hit %0d fill %0d alloc %0d flag %0d restore %0d wsec %0d freed %0d waits %0d",
             n_hit, n_fill, n_alloc, n_flag, n_restore, n_wsec, n_free, n_wait);
    check(n_flag > 50 && n_restore > 5 && n_free > 20 && n_wsec > 100 && n_wait > 0,
          "all mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
