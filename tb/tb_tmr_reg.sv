// tb_tmr_reg: checks that the triplicated register behaves as a plain
// register and that a flipped copy is outvoted and scrubbed at the next edge.
module tb_tmr_reg;
  logic clk = 0, rst_n = 1;
  logic [7:0] d, q, exp_q;
  int checks = 0, failures = 0;

  tmr_reg #(.W(8), .RST_VAL(8'hA5)) dut (.clk, .rst_n, .d, .q);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = 8'h00;
    #1 rst_n = 0;
    #1;
    check(q == 8'hA5, "reset value");
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 50; i++) begin
      d = 8'($urandom);
      exp_q = d;
      @(posedge clk); #1;
      check(q == exp_q, $sformatf("load %0d", i));
      // upset one copy, different each time
      case (i % 3)
        0: dut.r0 = dut.r0 ^ 8'($urandom | 1);
        1: dut.r1 = dut.r1 ^ 8'($urandom | 1);
        default: dut.r2 = dut.r2 ^ 8'($urandom | 1);
      endcase
      #1;
      check(q == exp_q, $sformatf("upset outvoted %0d", i));
      d = q;
      @(posedge clk); #1;
      check(dut.r0 == exp_q && dut.r1 == exp_q && dut.r2 == exp_q, "copies scrubbed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
