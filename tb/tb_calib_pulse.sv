// tb_calib_pulse: test pulses of several lengths; checks the pulse width
// (tp_len+1 clocks), the start one clock after the request edge, the channel
// mask, and that a request during a pulse is ignored.
module tb_calib_pulse;
  localparam int N = 16;
  logic clk = 0, rst_n = 1;
  logic tp_in = 0;
  logic [7:0] tp_len = 0;
  logic [N-1:0] tp_en = 0, tp_out;
  int checks = 0, failures = 0;

  calib_pulse #(.N_CH(N)) dut (.clk, .rst_n, .tp_in, .tp_len, .tp_en, .tp_out);

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
    for (int n = 0; n < 30; n++) begin
      int w, first;
      tp_len = 8'(8 + $urandom % 40);
      tp_en  = N'($urandom);
      @(negedge clk) tp_in = 1;
      w = 0; first = -1;
      for (int c = 0; c < 80; c++) begin
        @(negedge clk);
        if (c == 3) tp_in = 0;
        if (c == 5) tp_in = 1;      // second request during the pulse
        if (c == 6) tp_in = 0;
        if (tp_out != 0) begin
          check(tp_out == tp_en, "mask");
          if (first < 0) first = c;
          w++;
        end
      end
      check(first == 0 || tp_en == 0, $sformatf("start at %0d", first));
      check(w == int'(tp_len) + 1 || tp_en == 0, $sformatf("width %0d exp %0d", w, tp_len + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
