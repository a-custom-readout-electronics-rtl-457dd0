// tb_frame_tx: feeds random events and rebuilds them from the lane characters
// for every link count and line rate: checks the K27.7 start, the 8 bytes,
// the symbol period (10, 5, or 3 and 2 clocks alternately) and the frame
// length in periods (9, 5, 3).
module tb_frame_tx;
  import tiger_pkg::*;
  logic clk = 0, rst_n = 1;
  logic [63:0] ev;
  logic ev_valid, ev_pop, sym_tick;
  logic [1:0] rate = 0;
  logic [1:0] n_links = 0;
  logic [3:0][7:0] lane_data;
  logic [3:0] lane_k;
  logic [63:0] src[$], sent[$];
  int checks = 0, failures = 0, got = 0;

  frame_tx dut (.clk, .rst_n, .ev, .ev_valid, .ev_pop, .n_links, .rate, .sym_tick,
                .lane_data, .lane_k);

  always #5 clk = ~clk;
  assign ev_valid = src.size() > 0;
  assign ev = ev_valid ? src[0] : 64'h0;
  always @(posedge clk) if (ev_pop) void'(src.pop_front());

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  int last_gap = 0;
  int nbytes = -1, last_tick = -1, cyc = 0, ticks_in_frame = 0, start_tick = 0, tick_no = 0;
  logic [63:0] acc;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && sym_tick) begin
      int nl;
      nl = (n_links == 0) ? 1 : (n_links == 1) ? 2 : 4;
      if (last_tick >= 0) begin
        if (rate == 2) begin
          check(cyc - last_tick == 2 || cyc - last_tick == 3, "symbol period");
          if (last_gap > 0) check(cyc - last_tick + last_gap == 5, "alternating period");
          last_gap = cyc - last_tick;
        end else check(cyc - last_tick == (rate == 1 ? 5 : 10), "symbol period");
      end
      last_tick = cyc;
      tick_no++;
      for (int j = 0; j < 4; j++) begin
        if (j >= nl) check(lane_k[j] && lane_data[j] == K28_5, "unused lane idles");
        else if (lane_k[j] && lane_data[j] == K27_7) begin
          check(nbytes < 0, "start inside frame");
          nbytes = 0; start_tick = tick_no;
        end else if (lane_k[j]) begin
          check(lane_data[j] == K28_5, "idle character");
        end else begin
          check(nbytes >= 0, "data outside frame");
          acc = {acc[55:0], lane_data[j]};
          nbytes++;
          if (nbytes == 8) begin
            check(sent.size() > 0 && acc == sent[0], "event content");
            check(tick_no - start_tick + 1 == (9 + nl - 1) / nl, "frame length");
            if (sent.size() > 0) void'(sent.pop_front());
            got++;
            nbytes = -1;
          end
        end
      end
    end
  end

  initial begin
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 9; m++) begin
      n_links = 2'(m % 3);
      rate = 2'(m / 3);
      last_tick = -1;
      last_gap = 0;
      for (int n = 0; n < 20; n++) begin
        automatic logic [63:0] e = {$urandom, $urandom};
        src.push_back(e);
        sent.push_back(e);
        if ($urandom % 2 == 0) repeat (int'($urandom % 60)) @(negedge clk);
      end
      wait (src.size() == 0);
      repeat (40) @(negedge clk);
    end
    check(got == 180, $sformatf("received %0d events", got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
