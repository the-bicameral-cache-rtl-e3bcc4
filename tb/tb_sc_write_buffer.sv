// tb_sc_write_buffer - random pushes, lookups with removal (restore) and
// write-back handshakes against a queue model: occupancy, full flag, lookup
// results, oldest-first write-back order, one line per arming, and no
// write-back offered in a cycle with a push or removal.
module tb_sc_write_buffer;
  import bc_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  addr_t   lk_addr = '0, push_addr = '0, wb_addr;
  logic    lk_hit, full, draining, wb_valid;
  logic [2:0] lk_idx, rm_idx = '0;
  sector_t lk_data, push_data = '0, wb_data;
  logic    push_en = 0, rm_en = 0, drain_start = 0, wb_ready = 0;
  logic [3:0] count;
  int checks = 0, failures = 0, n_pop = 0, n_rm = 0, n_push = 0;

  sc_write_buffer dut (.*);

  always #5 clk = ~clk;

  typedef struct { addr_t a; sector_t d; } ent_t;
  ent_t q[$];
  bit   active;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic addr_t pool_addr();
    return {20'h0, 6'($urandom_range(0, 23)), 6'($urandom)};
  endfunction

  initial begin
    active = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      int op, hit_i; bit pop, exp_valid;
      @(negedge clk);
      push_en = 0; rm_en = 0; drain_start = 0;
      op = $urandom_range(0, 2);
      lk_addr = pool_addr();
      #1;
      hit_i = -1;
      foreach (q[i]) if (q[i].a[31:6] == lk_addr[31:6]) hit_i = i;
      check(lk_hit == (hit_i >= 0), "lookup hit");
      if (hit_i >= 0) check(int'(lk_idx) == hit_i && lk_data == q[hit_i].d, "lookup index and data");
      check(int'(count) == q.size() && full == (q.size() == DEPTH), "count and full");
      if (op == 0 && q.size() < DEPTH) begin
        bit dup;
        dup = 0;
        push_addr = pool_addr();
        foreach (q[i]) if (q[i].a[31:6] == push_addr[31:6]) dup = 1;
        if (!dup) begin
          push_en = 1;
          for (int k = 0; k < 16; k++) push_data[k*32 +: 32] = $urandom;
        end
      end else if (op == 1 && hit_i >= 0) begin
        rm_en = 1; rm_idx = 3'(hit_i);
      end
      drain_start = ($urandom_range(0, 5) == 0);
      wb_ready    = $urandom_range(0, 1);
      #1;
      exp_valid = active && q.size() > 0 && !push_en && !rm_en;
      check(wb_valid == exp_valid, $sformatf("wb_valid %0b expected %0b", wb_valid, exp_valid));
      if (wb_valid && q.size() > 0)
        check(wb_addr == {q[0].a[31:6], 6'd0} && wb_data == q[0].d, "write-back is the oldest line");
      pop = wb_valid && wb_ready;
      // model update for the coming edge
      if (pop) begin q.pop_front(); n_pop++; end
      else if (rm_en) begin q.delete(hit_i); n_rm++; end
      else if (push_en) begin q.push_back('{push_addr, push_data}); n_push++; end
      if (drain_start) active = 1;
      else if (pop || (int'(count) == 0)) active = 0;
    end
    $display("push %0d remove %0d write-back %0d", n_push, n_rm, n_pop);
    check(n_pop > 100 && n_rm > 100 && n_push > 300, "all operations exercised");
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
