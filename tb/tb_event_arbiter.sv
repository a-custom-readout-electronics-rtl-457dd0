// tb_event_arbiter: random request patterns; the grant is compared with a
// round-robin reference computed here, and every requester must be served
// within N grants.
module tb_event_arbiter;
  localparam int N = 64;
  logic clk = 0, rst_n = 1;
  logic [N-1:0] req = '0, gnt;
  logic [5:0] gnt_idx;
  logic gnt_valid, advance = 0;
  int last = N - 1;
  int checks = 0, failures = 0;

  event_arbiter #(.N_CH(N)) dut (.clk, .rst_n, .req, .advance, .gnt, .gnt_idx, .gnt_valid);

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
    for (int n = 0; n < 2000; n++) begin
      automatic int e = -1;
      @(negedge clk);
      req = {$urandom, $urandom};
      if (n % 7 == 0) req = N'(1) << ($urandom % N);
      if (n % 11 == 0) req = '0;
      advance = ($urandom % 4 != 0);
      for (int k = 1; k <= N; k++) if (e < 0 && req[(last + k) % N]) e = (last + k) % N;
      #1;
      check(gnt_valid == (e >= 0), "valid");
      if (e >= 0) check(int'(gnt_idx) == e && gnt == (N'(1) << e), $sformatf("grant %0d exp %0d", gnt_idx, e));
      if (advance && e >= 0) last = e;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
