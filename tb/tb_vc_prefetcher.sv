// tb_vc_prefetcher - checks the prefetch selection against an independent
// reference over random bank states: no prefetch while an idle bank has a
// pending request; otherwise the lowest idle bank whose last operation was a
// Vector Cache read not at the end of its line, reading the next sector.
module tb_vc_prefetcher;
  import bc_pkg::*;
  localparam int NB = 8;
  logic          enable;
  logic [NB-1:0] idle, pending, last_vrd;
  logic [SADDR_W-1:0] last_saddr [NB];
  logic          pf_valid;
  logic [2:0]    pf_bank;
  addr_t         pf_addr;
  int checks = 0, failures = 0, fired = 0;

  vc_prefetcher dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int it = 0; it < 4000; it++) begin
      bit exp_v; int exp_b;
      enable   = ($urandom_range(0, 9) != 0);
      idle     = NB'($urandom);
      pending  = NB'($urandom) & NB'($urandom) & NB'($urandom);
      last_vrd = NB'($urandom);
      for (int b = 0; b < NB; b++) begin
        last_saddr[b] = SADDR_W'($urandom);
        if ($urandom_range(0, 3) == 0) last_saddr[b][3:0] = 4'hf;   // end of line
      end
      #1;
      exp_v = 0; exp_b = 0;
      if (enable && (idle & pending) == 0)
        for (int b = NB - 1; b >= 0; b--)
          if (idle[b] && last_vrd[b] && last_saddr[b] % 16 != 15) begin
            exp_v = 1; exp_b = b;
          end
      check(pf_valid == exp_v, $sformatf("pf_valid %0b expected %0b", pf_valid, exp_v));
      if (exp_v) begin
        fired++;
        check(int'(pf_bank) == exp_b, $sformatf("bank %0d expected %0d", pf_bank, exp_b));
        check(pf_addr == addr_t'((last_saddr[exp_b] + 1) * 64), "next sector address");
        check(pf_addr[16:14] == last_saddr[exp_b][10:8], "prefetch stays in the bank");
      end
    end
    check(fired > 100, "prefetch selected often enough");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
