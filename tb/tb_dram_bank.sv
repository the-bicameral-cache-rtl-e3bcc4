// tb_dram_bank - checks the bank timing model: an access to a closed bank
// takes RAS+CAS (39) cycles, to the open row CAS (11), to another row
// PRE+RAS+CAS (50); done holds until the grant; the access class strobes.
module tb_dram_bank;
  logic clk = 0, rst_n = 0;
  logic start = 0, grant = 0;
  logic [14:0] start_row = '0;
  logic idle, done, ev_hit, ev_empty, ev_conflict;
  int checks = 0, failures = 0;

  dram_bank dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one access; returns the cycles from start to done
  task automatic access(input logic [14:0] row, input int exp_lat, input int cls, input int hold);
    int n;
    @(negedge clk);
    check(idle, "bank idle before start");
    start = 1; start_row = row;
    #1;
    check(ev_hit == (cls == 0) && ev_empty == (cls == 1) && ev_conflict == (cls == 2),
          $sformatf("access class %0d for row %0d", cls, row));
    @(negedge clk); start = 0; n = 1;
    while (!done && n < 200) begin @(negedge clk); n++; end
    check(n == exp_lat, $sformatf("latency %0d, expected %0d", n, exp_lat));
    repeat (hold) begin @(negedge clk); check(done, "done holds until grant"); end
    grant = 1;
    @(negedge clk); grant = 0;
    check(idle && !done, "idle after grant");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    access(15'd5,     39, 1, 0);   // closed -> RAS+CAS
    access(15'd5,     11, 0, 3);   // open row -> CAS
    access(15'd7,     50, 2, 0);   // other row -> PRE+RAS+CAS
    access(15'd7,     11, 0, 1);
    access(15'h7fff,  50, 2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
