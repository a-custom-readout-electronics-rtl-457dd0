// tb_channel_ctrl: one channel with the behavioural analogue model.  Sends
// time-over-threshold and sample-and-hold hits with random ramp lengths and
// checks every event field against values computed here (coarse times from the
// trigger edges, sampling window length, ADC codes, buffer order), checks that
// the trailing edge comes from trig_e with double threshold and from trig_t
// with single threshold, then fills
// all four buffers to check that a fifth hit is dropped.
module tb_channel_ctrl;
  import tiger_pkg::*;
  logic clk = 0, rst_n = 1;
  ch_cfg_t cfg;
  logic [15:0] coarse = 0;
  logic trig_t = 0, trig_e = 0;
  logic [1:0] buf_sel, conv_slot;
  logic [3:0] sh_sample;
  logic t_conv, e_conv, t_cmp, e_cmp, ev_valid, ev_ack = 0, lost;
  ch_event_t ev;
  logic [3:0][10:0] t_len, e_len;
  int checks = 0, failures = 0, n_lost = 0;
  ch_event_t exp_q[$];
  int sh_high = 0, sh_max = 0;

  channel_ctrl dut (.clk, .rst_n, .cfg, .coarse, .trig_t, .trig_e, .buf_sel, .sh_sample,
                    .t_conv, .e_conv, .conv_slot, .t_cmp, .e_cmp, .ev_valid, .ev, .ev_ack, .lost);
  analog_channel_model u_ana (.clk, .t_conv, .e_conv, .conv_slot, .t_len, .e_len, .t_cmp, .e_cmp);

  always #5 clk = ~clk;
  always @(posedge clk) coarse <= coarse + 1'b1;
  always @(posedge clk) if (lost) n_lost++;
  always @(posedge clk) begin
    if (|sh_sample) sh_high++;
    else begin if (sh_high > sh_max) sh_max = sh_high; sh_high = 0; end
  end

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

  // reader: acknowledges events after a random delay when enabled
  bit reader_on = 1;
  always @(negedge clk) begin
    ev_ack <= 0;
    if (reader_on && ev_valid && ($urandom % 3 == 0)) begin
      ch_event_t e;
      ev_ack <= 1;
      if (exp_q.size() == 0) check(0, "unexpected event");
      else begin
        e = exp_q.pop_front();
        check(ev == e, $sformatf("event exp %h got %h", e, ev));
      end
    end
  end

  logic [1:0] slot = 0;

  task automatic hit_tot(input int width, input int tl, input int el);
    ch_event_t e;
    @(negedge clk);
    t_len[slot] = 11'(tl);
    e_len[slot] = 11'(el);
    e = '0;
    e.buffer = slot;
    e.t_coarse = coarse;
    trig_t = 1; trig_e = 1;
    repeat (width) @(negedge clk);
    e.e_coarse = coarse;
    trig_t = 0; trig_e = 0;
    e.t_fine = 10'(tl);
    e.e_fine = 10'(el);
    exp_q.push_back(e);
    slot++;
    repeat (3) @(negedge clk);
  endtask

  // ToT hit whose discriminators fall at different times: trig_t after wt
  // clocks, trig_e after we clocks.  The trailing time stamp is that of the
  // fast edge with single threshold and of the slow edge otherwise.
  task automatic hit_2(input int wt, input int we, input bit single, input int tl, input int el);
    ch_event_t e;
    @(negedge clk);
    t_len[slot] = 11'(tl);
    e_len[slot] = 11'(el);
    e = '0;
    e.buffer = slot;
    e.t_coarse = coarse;
    trig_t = 1; trig_e = 1;
    for (int i = 1; i <= (wt > we ? wt : we); i++) begin
      @(negedge clk);
      if (i == wt) begin trig_t = 0; if (single) e.e_coarse = coarse; end
      if (i == we) begin trig_e = 0; if (!single) e.e_coarse = coarse; end
    end
    e.t_fine = 10'(tl);
    e.e_fine = 10'(el);
    exp_q.push_back(e);
    slot++;
    repeat (3) @(negedge clk);
  endtask

  task automatic hit_sh(input int st, input int tl, input int el);
    ch_event_t e;
    @(negedge clk);
    t_len[slot] = 11'(tl);
    e_len[slot] = 11'(el);
    e = '0;
    e.buffer = slot;
    e.mode_sh = 1;
    e.t_coarse = coarse;
    e.e_coarse = coarse + 16'((st + 1) * 4);
    trig_t = 1;
    repeat (3) @(negedge clk);
    trig_t = 0;
    e.t_fine = 10'(tl);
    e.e_fine = 10'(el);
    exp_q.push_back(e);
    slot++;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    cfg = '0;
    cfg.enable = 1;
    t_len = '0; e_len = '0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ToT hits, spaced so buffers recycle
    for (int i = 0; i < 10; i++) begin
      hit_tot(2 + int'($urandom % 40), 1 + int'($urandom % 600), 1 + int'($urandom % 600));
      repeat (int'($urandom % 800)) @(negedge clk);
    end
    wait (exp_q.size() == 0);
    // trailing edge from the slow (double threshold) or fast (single) discriminator
    for (int i = 0; i < 12; i++) begin
      automatic bit single = i[0];
      automatic int wt = 2 + int'($urandom % 30);
      automatic int we = 2 + int'($urandom % 30);
      if (we == wt) we++;
      cfg.single_thr = single;
      hit_2(wt, we, single, 1 + int'($urandom % 600), 1 + int'($urandom % 600));
      repeat (700 + int'($urandom % 100)) @(negedge clk);
    end
    wait (exp_q.size() == 0);
    cfg.single_thr = 0;
    // S&H hits, every sampling time
    cfg.mode_sh = 1;
    for (int st = 0; st < 8; st++) begin
      cfg.sample_time = 3'(st);
      sh_max = 0;
      hit_sh(st, 1 + int'($urandom % 600), 1 + int'($urandom % 1000));
      repeat (40) @(negedge clk);
      check(sh_max == (st + 1) * 4, $sformatf("S&H window %0d clocks for setting %0d", sh_max, st));
      wait (exp_q.size() == 0);
    end
    // overflow: reader off, five quick hits, the fifth is lost
    cfg.mode_sh = 0;
    reader_on = 0;
    repeat (5) @(negedge clk);
    for (int i = 0; i < 4; i++) hit_tot(3, 20 + i, 30 + i);
    repeat (200) @(negedge clk);
    check(ev_valid, "events pending");
    @(negedge clk) trig_t = 1; trig_e = 1;
    repeat (3) @(negedge clk);
    trig_t = 0; trig_e = 0;
    repeat (3) @(negedge clk);
    check(n_lost == 1, $sformatf("lost count %0d", n_lost));
    // disabled channel ignores hits
    reader_on = 1;
    wait (exp_q.size() == 0);
    repeat (5) @(negedge clk);
    cfg.enable = 0;
    @(negedge clk) trig_t = 1;
    repeat (3) @(negedge clk) trig_t = 0;
    repeat (3000) @(negedge clk);
    check(!ev_valid, "disabled channel produced an event");
    check(exp_q.size() == 0, "all events read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
