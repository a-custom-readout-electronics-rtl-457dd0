// tb_enc8b10b: compares the encoder with the table-based reference of
// ref8b10b_pkg over random data/control streams and all 256 data bytes in
// both disparities, and checks published characters, DC balance (running
// digital sum stays within +-3 around zero) and run length (at most 5).
module tb_enc8b10b;
  import ref8b10b_pkg::*;
  logic clk = 0, rst_n = 1;
  logic en = 0, k = 0;
  logic [7:0] din = 0;
  logic [9:0] dout;
  logic rd;
  int checks = 0, failures = 0;

  enc8b10b dut (.clk, .rst_n, .en, .k, .din, .dout, .rd);

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

  logic ref_rd = 0;
  int rds = -1, run = 0;
  logic last_bit = 0;

  task automatic send(input logic kk, input logic [7:0] b);
    logic [9:0] e;
    @(negedge clk);
    en = 1; k = kk; din = b;
    e = encode(kk, b, ref_rd);
    @(negedge clk);
    en = 0;
    check(dout == e, $sformatf("%s%0d.%0d got %b exp %b", kk ? "K" : "D", b[4:0], b[7:5], dout, e));
    check(rd == ref_rd, "running disparity");
    for (int i = 9; i >= 0; i--) begin
      rds += dout[i] ? 1 : -1;
      if (dout[i] == last_bit) run++; else run = 1;
      last_bit = dout[i];
      check(run <= 5, "run length");
      check(rds >= -3 && rds <= 3, "running digital sum");
    end
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // published characters from RD-
    send(1, 8'hBC);
    check(dout == 10'b0011111010, "K28.5 RD-");
    send(1, 8'hBC);
    check(dout == 10'b1100000101, "K28.5 RD+");
    send(0, 8'h00);   // RD- -> D0.0 = 100111 0100
    check(dout == 10'b1001110100, "D0.0 RD-");
    for (int r = 0; r < 2; r++)
      for (int b = 0; b < 256; b++) send(0, 8'(b));
    for (int n = 0; n < 3000; n++) begin
      automatic int sel = int'($urandom % 10);
      if (sel == 0) send(1, 8'hBC);
      else if (sel == 1) send(1, 8'hFB);
      else if (sel == 2) send(1, {3'($urandom), 5'd28});
      else send(0, 8'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
