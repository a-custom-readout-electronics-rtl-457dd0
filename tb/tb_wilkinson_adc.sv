// tb_wilkinson_adc: drives comparator pulses of known length and checks the
// code, the end-of-conversion time, saturation and the no-ramp time-out.
module tb_wilkinson_adc;
  logic clk = 0, rst_n = 1;
  logic start = 0, cmp = 0, busy, done;
  logic [9:0] code;
  int checks = 0, failures = 0;

  wilkinson_adc #(.ADC_BITS(10)) dut (.clk, .rst_n, .start, .cmp, .busy, .done, .code);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // convert: comparator rises `gap` clocks after start, stays high `len` clocks
  task automatic convert(input int len, input int gap, input int expect_code);
    int cyc;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    repeat (gap) @(negedge clk);
    cmp = (len > 0);
    cyc = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc == len) cmp = 0;
      if (cyc > 3000) break;
    end
    cmp = 0;
    check(code == 10'(expect_code), $sformatf("len %0d code %0d exp %0d", len, code, expect_code));
    // done comes one clock after the first low sample, or at saturation
    if (len > 0 && len < 1023)
      check(cyc == len + 1, $sformatf("len %0d done after %0d cycles", len, cyc));
    @(negedge clk);
    check(!busy && !done, "idle after done");
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    convert(1, 0, 1);
    convert(5, 3, 5);
    convert(1022, 1, 1022);
    for (int i = 0; i < 20; i++) begin
      automatic int l = 1 + int'($urandom % 1000);
      convert(l, int'($urandom % 5), l);
    end
    convert(1500, 0, 1023);   // saturation
    convert(0, 0, 0);         // no ramp: time-out
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
