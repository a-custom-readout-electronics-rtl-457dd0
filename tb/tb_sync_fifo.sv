// tb_sync_fifo: random pushes and pops against a queue model, checking data
// order, count, full and empty.
module tb_sync_fifo;
  logic clk = 0, rst_n = 1;
  logic push = 0, pop = 0, full, empty;
  logic [63:0] din = 0, dout;
  logic [4:0] count;
  logic [63:0] q[$];
  int checks = 0, failures = 0;

  sync_fifo #(.W(64), .DEPTH(16)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .full, .empty, .count);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      check(count == 5'(q.size()) && empty == (q.size() == 0) && full == (q.size() == 16), "flags");
      if (q.size() > 0) check(dout == q[0], "head data");
      push = (q.size() < 16) && ($urandom % ((n / 500) % 2 == 0 ? 2 : 3) == 0);
      pop  = (q.size() > 0) && ($urandom % ((n / 500) % 2 == 0 ? 3 : 2) == 0);
      din = {$urandom, $urandom};
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
