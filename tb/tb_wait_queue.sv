// tb_wait_queue -- random pushes and pops against a queue model; checks the
// head, empty, full and count after every cycle, including full-queue
// behaviour and simultaneous push and pop.
module tb_wait_queue;
  localparam int W = 12, D = 5;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [W-1:0] din = '0, head;
  logic empty, full;
  logic [$clog2(D+1)-1:0] count;
  always #5 clk = ~clk;

  wait_queue #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .push, .din, .pop, .head, .empty, .full, .count);

  int checks = 0, failures = 0, nfull = 0;
  logic [W-1:0] q[$];

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      pop  = (q.size() > 0) && (($urandom % 3) == 0 || (i / 500) % 2 == 1 && ($urandom % 2));
      push = ((q.size() < D) || pop) && (($urandom % 2) == 0 || (i / 500) % 2 == 0);
      din  = W'($urandom);
      @(posedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
      #1;
      checks++;
      if (count != q.size() || empty != (q.size() == 0) || full != (q.size() == D) ||
          (q.size() > 0 && head != q[0])) begin
        failures++;
        $display("ERROR cycle %0d count=%0d exp=%0d head=%h", i, count, q.size(), head);
      end
      if (full) nfull++;
    end
    checks++;
    if (nfull == 0) begin failures++; $display("ERROR queue never full"); end
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
