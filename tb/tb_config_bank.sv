// tb_config_bank: random writes and reads against a model array, then single
// and double bit upsets in the stored codewords: a single upset must be
// corrected on read, flagged, and scrubbed from storage; a double upset must
// be flagged as uncorrectable.
module tb_config_bank;
  import tiger_pkg::*;
  localparam int NC = 8, NG = 4;
  logic clk = 0, rst_n = 1;
  logic wr_en = 0, wr_glb = 0, rd_glb = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  logic [15:0] wr_data = 0, rd_data;
  logic [NC-1:0][15:0] ch_cfg;
  logic [NG-1:0][15:0] glb_cfg;
  logic err_corr, err_uncorr;
  logic [15:0] model [NC+NG];
  int checks = 0, failures = 0;

  config_bank #(.N_CH(NC), .N_GLB(NG), .CH_RST(16'h1234), .GLB_RST(16'h00FF)) dut (
    .clk, .rst_n, .wr_en, .wr_glb, .wr_addr, .wr_data, .rd_glb, .rd_addr, .rd_data,
    .ch_cfg, .glb_cfg, .err_corr, .err_uncorr);

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

  task automatic rd_check(input int i);
    rd_glb  = (i >= NC);
    rd_addr = 6'(i >= NC ? i - NC : i);
    #1;
    check(rd_data == model[i], $sformatf("read %0d got %h exp %h", i, rd_data, model[i]));
    check((i < NC ? ch_cfg[i % NC] : glb_cfg[(i - NC) % NG]) == model[i], "decoded output");
  endtask

  initial begin
    #1 rst_n = 0;
    for (int i = 0; i < NC + NG; i++) model[i] = (i < NC) ? 16'h1234 : 16'h00FF;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NC + NG; i++) rd_check(i);
    for (int n = 0; n < 60; n++) begin
      automatic int i = int'($urandom % (NC + NG));
      @(negedge clk);
      wr_en = 1; wr_glb = (i >= NC); wr_addr = 6'(i >= NC ? i - NC : i);
      wr_data = 16'($urandom);
      model[i] = wr_data;
      @(negedge clk);
      wr_en = 0;
      rd_check(int'($urandom % (NC + NG)));
      rd_check(i);
    end
    check(!err_corr && !err_uncorr, "no errors flagged");
    // single upsets: corrected, flagged, scrubbed
    for (int n = 0; n < 20; n++) begin
      automatic int i = int'($urandom % (NC + NG));
      automatic int b = int'($urandom % HAM_W);
      @(negedge clk);
      dut.mem[i][b] = ~dut.mem[i][b];
      rd_check(i);
      repeat (NC + NG + 2) @(negedge clk);
      check(err_corr && !err_uncorr, "single upset flagged");
      check(dut.mem[i] == ham_encode(model[i]), "scrubbed");
      // clear flags with a rewrite
      wr_en = 1; wr_glb = (i >= NC); wr_addr = 6'(i >= NC ? i - NC : i); wr_data = model[i];
      @(negedge clk) wr_en = 0;
      @(negedge clk);
      check(!err_corr, "flag cleared");
    end
    // double upset: detected
    @(negedge clk);
    dut.mem[2][3] = ~dut.mem[2][3];
    dut.mem[2][9] = ~dut.mem[2][9];
    repeat (3) @(negedge clk);
    check(err_uncorr, "double upset flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
