// tb_serializer: loads random symbols at the pace of each line rate (every 10
// or 5 clocks, or alternately after 3 and 2 clocks at 4 bits per clock) and
// checks that, once two symbols are buffered, the line bits leave MSB first,
// gap-free, with the bit repetition of the rate.
module tb_serializer;
  logic clk = 0, rst_n = 1;
  logic [1:0] rate = 0;
  logic load = 0;
  logic [9:0] sym = 0;
  logic [3:0] tx_bits;
  int checks = 0, failures = 0;
  logic exp_bits[$];

  serializer dut (.clk, .rst_n, .rate, .load, .sym, .tx_bits);

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

  task automatic run(input logic [1:0] r, input int nclk);
    int div, nl, started;
    rate = r;
    @(negedge clk);   // the rate change flushes the buffer
    exp_bits.delete();
    div = 0; nl = 0; started = 0;
    for (int c = 0; c < nclk; c++) begin
      @(negedge clk);
      if (started) begin
        if (r == 0) begin
          automatic logic b = exp_bits.pop_front();
          check(tx_bits == {4{b}}, "1 bit per clock");
        end else if (r == 1) begin
          automatic logic b0 = exp_bits.pop_front();
          automatic logic b1 = exp_bits.pop_front();
          check(tx_bits == {b0, b0, b1, b1}, "2 bits per clock");
        end else begin
          for (int i = 3; i >= 0; i--) check(tx_bits[i] == exp_bits.pop_front(), "4 bits per clock");
        end
      end else begin
        check(tx_bits == 4'b0, "quiet before priming");
      end
      load = (div == 0) || (r == 2 && div == 3);
      if (load) begin
        sym = 10'($urandom);
        for (int i = 9; i >= 0; i--) exp_bits.push_back(sym[i]);
        nl++;
      end
      if (nl == 2) started = 1;   // output begins at the edge of the second load
      div = (div >= ((r == 0) ? 9 : 4)) ? 0 : div + 1;
    end
    load = 0;
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0, 400);
    run(1, 300);
    run(2, 300);
    run(0, 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
