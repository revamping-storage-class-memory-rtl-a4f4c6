// tb_lock_register -- random test of the bus lock register against a
// cycle-level reference: the lock is granted one cycle after a request meets
// an idle memory controller, and cleared one cycle after the lock pin
// releases it. A grant pulse must accompany each grant.
module tb_lock_register;
  logic clk = 0, rst_n = 0, ull_req = 0, bus_idle = 0, ull_release = 0;
  logic lock, grant_pulse;
  always #5 clk = ~clk;

  lock_register dut (.clk, .rst_n, .ull_req, .bus_idle, .ull_release, .lock, .grant_pulse);

  int checks = 0, failures = 0, grants = 0, releases = 0;
  logic exp_lock = 0, exp_pulse = 0;

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      ull_req     = ($urandom % 3) != 0;
      bus_idle    = ($urandom % 2) != 0;
      ull_release = exp_lock && (($urandom % 4) == 0);
      @(posedge clk);
      // reference, from the values of the cycle just ended
      exp_pulse = !exp_lock && ull_req && bus_idle;
      if (exp_lock && ull_release) begin exp_lock = 0; releases++; end
      else if (!exp_lock && ull_req && bus_idle) begin exp_lock = 1; grants++; end
      #1;
      checks++;
      if (lock !== exp_lock || grant_pulse !== exp_pulse) begin
        failures++;
        $display("ERROR cycle %0d lock=%b exp=%b pulse=%b exp=%b", i, lock, exp_lock, grant_pulse, exp_pulse);
      end
    end
    checks++;
    if (grants < 10 || releases < 10) begin failures++; $display("ERROR too few grants/releases"); end
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
