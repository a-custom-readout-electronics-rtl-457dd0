// tb_spi_slave: an SPI master task writes and reads configuration words
// through the slave into a register array model; written words, addresses and
// read-back data are compared with what the master sent.
module tb_spi_slave;
  logic clk = 0, rst_n = 1;
  logic sclk = 0, csn = 1, mosi = 0, miso;
  logic wr_en, wr_glb, rd_glb;
  logic [5:0] wr_addr, rd_addr;
  logic [15:0] wr_data, rd_data;
  logic [15:0] regs [128];
  int checks = 0, failures = 0, n_wr = 0;

  spi_slave dut (.clk, .rst_n, .sclk, .csn, .mosi, .miso, .wr_en, .wr_glb, .wr_addr,
                 .wr_data, .rd_glb, .rd_addr, .rd_data);

  always #5 clk = ~clk;
  assign rd_data = regs[{rd_glb, rd_addr}];
  always @(posedge clk) if (wr_en) begin regs[{wr_glb, wr_addr}] <= wr_data; n_wr++; end

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

  localparam int HALF = 50;   // half SCLK period in ps (5 system clocks)

  task automatic xfer(input logic [7:0] cmd, input logic [15:0] data, output logic [15:0] rx);
    logic [23:0] w;
    w = {cmd, data};
    rx = '0;
    csn = 0;
    #(HALF);
    for (int i = 23; i >= 0; i--) begin
      mosi = w[i];
      #(HALF) sclk = 1;
      if (i < 16) rx = {rx[14:0], miso};
      #(HALF) sclk = 0;
    end
    #(HALF) csn = 1;
    #(4 * HALF);
  endtask

  initial begin
    logic [15:0] rx, v;
    logic [15:0] model [128];
    for (int i = 0; i < 128; i++) begin regs[i] = 16'(i * 3); model[i] = 16'(i * 3); end
    #1 rst_n = 0;
    #30 rst_n = 1;
    #100;
    for (int n = 0; n < 40; n++) begin
      automatic int a = int'($urandom % 128);
      v = 16'($urandom);
      xfer({1'b0, 7'(a)}, v, rx);
      model[a] = v;
      check(regs[a] == v, $sformatf("write %0d", a));
      a = int'($urandom % 128);
      xfer({1'b1, 7'(a)}, 16'h0, rx);
      check(rx == model[a], $sformatf("read %0d got %h exp %h", a, rx, model[a]));
    end
    check(n_wr == 40, $sformatf("write strobes %0d", n_wr));
    // aborted write: CSN raised after 12 bits, nothing written
    csn = 0;
    for (int i = 0; i < 12; i++) begin #(HALF) sclk = 1; #(HALF) sclk = 0; end
    #(HALF) csn = 1;
    #(4 * HALF);
    check(n_wr == 40, "aborted transaction wrote");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
