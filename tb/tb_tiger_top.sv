// tb_tiger_top: end-to-end test of the full 64-channel digital core at its
// default parameters.
//
// Every channel gets a behavioural analogue model.  The test configures the
// chip over SPI, fires hits, deserialises and 8b/10b-decodes the four output
// links (aligning on the K28.5 comma), rebuilds the event frames and matches
// each event against the one predicted here from the trigger times, the
// sampling window and the ramp lengths given to the models.  It runs through
// all nine link set-ups (1, 2, 4 links at 160, 320 and 640 Mb/s per link) and
// makes each mechanism
// happen at least once, counting it:
//   ToT hits with double and single threshold, S&H hits, a 64-channel burst that fills the event FIFO and
//   contends in the arbiter, a lost hit when all four buffers are busy, SPI
//   read-back, a calibration pulse, and a corrected configuration upset.
// It also checks the link throughput: during the burst on one SDR link,
// consecutive frames start exactly 9 symbol periods (90 clocks) apart.
module tb_tiger_top;
  import tiger_pkg::*;
  import ref8b10b_pkg::*;
  localparam int N = 64;

  logic clk = 0, rst_n = 1;
  logic spi_sclk = 0, spi_csn = 1, spi_mosi = 0, spi_miso, tp_in = 0;
  logic [N-1:0] trig_t = '0, trig_e = '0, t_cmp, e_cmp, t_conv, e_conv, tp_out;
  logic [N-1:0][1:0] buf_sel, conv_slot;
  logic [N-1:0][3:0] sh_sample;
  logic [N-1:0][15:0] ch_cfg_out;
  logic [3:0][15:0] glb_cfg_out;
  logic [3:0][3:0] tx_bits;
  logic [1:0] cfg_err;
  logic [15:0] lost_hits;
  logic [N-1:0][3:0][10:0] t_len, e_len;

  tiger_top dut (.clk, .rst_n, .spi_sclk, .spi_csn, .spi_mosi, .spi_miso, .tp_in,
    .trig_t, .trig_e, .t_cmp, .e_cmp, .buf_sel, .sh_sample, .t_conv, .e_conv, .conv_slot,
    .tp_out, .ch_cfg_out, .glb_cfg_out, .tx_bits, .cfg_err, .lost_hits);

  for (genvar c = 0; c < N; c++) begin : g_ana
    analog_channel_model u_m (.clk, .t_conv(t_conv[c]), .e_conv(e_conv[c]),
      .conv_slot(conv_slot[c]), .t_len(t_len[c]), .e_len(e_len[c]),
      .t_cmp(t_cmp[c]), .e_cmp(e_cmp[c]));
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mirror of the on-chip coarse counter
  logic [15:0] coarse = 0;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) coarse <= 0; else coarse <= coarse + 1'b1;

  // mechanism counters
  int n_tot = 0, n_sh = 0, n_burst_full = 0, n_contend = 0, n_spi_rd = 0, n_cal = 0;
  int n_seu = 0, n_rx = 0, n_single = 0;
  int mode_rx[9];
  always @(posedge clk) begin
    if (dut.fifo_full) n_burst_full++;
    if ($countones(dut.ev_valid) > 1) n_contend++;
  end

  // ---------------- SPI master ----------------
  localparam int HALF = 30;
  task automatic spi(input logic rw, input logic glb, input int addr, input logic [15:0] d,
                     output logic [15:0] rx);
    logic [23:0] w;
    w = {rw, glb, 6'(addr), d};
    rx = 0;
    spi_csn = 0;
    #(HALF);
    for (int i = 23; i >= 0; i--) begin
      spi_mosi = w[i];
      #(HALF) spi_sclk = 1;
      if (i < 16) rx = {rx[14:0], spi_miso};
      #(HALF) spi_sclk = 0;
    end
    #(HALF) spi_csn = 1;
    #(4 * HALF);
  endtask
  task automatic wr(input logic glb, input int addr, input logic [15:0] d);
    logic [15:0] rx;
    spi(0, glb, addr, d, rx);
  endtask

  // ---------------- link receiver ----------------
  logic [9:0] dec_k [logic [9:0]];
  logic [9:0] win [4];
  bit aligned = 0, rx_hold = 0;
  int bitcnt = 0, cyc = 0, nl_rx = 1, mode_idx = 0;
  logic [63:0] acc;
  int nbytes = -1;
  event_t exp_q[$];
  int frame_cyc[$];

  function automatic void take_symbol(input logic [9:0] s);
    logic [9:0] d;
    if (!dec_k.exists(s)) begin check(0, $sformatf("bad symbol %b", s)); return; end
    d = dec_k[s];
    if (d[8] && d[7:0] == K27_7) begin
      check(nbytes < 0, "start inside frame");
      nbytes = 0;
      frame_cyc.push_back(cyc);
    end else if (d[8]) begin
      check(d[7:0] == K28_5, "unexpected control character");
    end else if (nbytes >= 0) begin
      acc = {acc[55:0], d[7:0]};
      nbytes++;
      if (nbytes == 8) begin
        event_t e;
        int found;
        e = event_t'(acc);
        found = -1;
        foreach (exp_q[i]) if (found < 0 && exp_q[i].channel == e.channel &&
                               exp_q[i].t_coarse == e.t_coarse) found = i;
        check(found >= 0, $sformatf("unexpected event ch %0d t %0d", e.channel, e.t_coarse));
        if (found >= 0) begin
          check(exp_q[found] == e, $sformatf("event ch %0d exp %h got %h", e.channel, exp_q[found], e));
          exp_q.delete(found);
        end
        if (outstanding[e.channel] > 0) outstanding[e.channel]--;
        n_rx++;
        mode_rx[mode_idx]++;
        nbytes = -1;
      end
    end else check(0, "data outside frame");
  endfunction

  always @(negedge clk) begin
    int nb;
    cyc++;
    nb = glb_cfg_out[0][3] ? 4 : glb_cfg_out[0][2] ? 2 : 1;
    if (!rx_hold)
      for (int l = 0; l < 4; l++)
        check(nb == 4 || (nb == 2 && tx_bits[l][3] == tx_bits[l][2] && tx_bits[l][1] == tx_bits[l][0])
              || tx_bits[l] == {4{tx_bits[l][3]}}, "bit repetition");
    for (int i = 0; i < nb; i++) begin
      for (int l = 0; l < 4; l++) win[l] = {win[l][8:0], tx_bits[l][3 - i * (4 / nb)]};
      if (rx_hold) begin
      end else if (!aligned) begin
        if (win[0] == 10'b0011111010 || win[0] == 10'b1100000101) begin
          aligned = 1;
          bitcnt = 0;
        end
      end else begin
        bitcnt++;
        if (bitcnt == 10) begin
          bitcnt = 0;
          for (int l = 0; l < nl_rx; l++) take_symbol(win[l]);
          for (int l = nl_rx; l < 4; l++)
            check(win[l] == 10'b0011111010 || win[l] == 10'b1100000101, "idle lane");
        end
      end
    end
  end

  // ---------------- hits ----------------
  // Fire a hit on every channel in mask; ToT hits last `width` clocks.
  // With e_extra > 0 the slow discriminators stay high e_extra clocks longer
  // than the fast ones, so the trailing time stamp tells the single-threshold
  // channels (fast edge) from the others (slow edge).
  // Ramp lengths are random, or `len` clocks when len > 0.  Channels that may
  // have all four buffers busy (four events not yet received) are skipped.
  int outstanding [N];
  task automatic hits(input logic [N-1:0] mask_in, input int width, input int len = 0,
                      input int e_extra = 0);
    event_t e [N];
    logic [N-1:0] mask, single;
    single = '0;
    mask = mask_in;
    for (int c = 0; c < N; c++) if (outstanding[c] >= 4) mask[c] = 1'b0;
    for (int c = 0; c < N; c++) if (mask[c]) begin
      logic [1:0] b;
      ch_cfg_t cf;
      cf = ch_cfg_t'(ch_cfg_out[c]);
      b = buf_sel[c];
      t_len[c][b] = 11'(len > 0 ? len : 1 + $urandom % 500);
      e_len[c][b] = 11'(len > 0 ? len : 1 + $urandom % 1000);
      outstanding[c]++;
      e[c] = '0;
      e[c].channel = 6'(c);
      e[c].buffer = b;
      e[c].mode_sh = cf.mode_sh;
      single[c] = cf.single_thr;
      e[c].t_coarse = coarse;
      e[c].t_fine = 10'(t_len[c][b]);
      e[c].e_fine = 10'(e_len[c][b]);
      if (cf.mode_sh) begin
        e[c].e_coarse = coarse + 16'((int'(cf.sample_time) + 1) * 4);
        n_sh++;
      end else n_tot++;
    end
    trig_t = trig_t | mask;
    trig_e = trig_e | mask;
    repeat (width) @(negedge clk);
    for (int c = 0; c < N; c++)
      if (mask[c] && !e[c].mode_sh && (single[c] || e_extra == 0)) begin
        e[c].e_coarse = coarse;
        if (single[c]) n_single++;
      end
    trig_t = trig_t & ~mask;
    if (e_extra > 0) begin
      @(negedge clk);
      repeat (e_extra - 1) @(negedge clk);
      for (int c = 0; c < N; c++)
        if (mask[c] && !e[c].mode_sh && !single[c]) e[c].e_coarse = coarse;
    end
    for (int c = 0; c < N; c++) if (mask[c]) exp_q.push_back(e[c]);
    trig_e = trig_e & ~mask;
    @(negedge clk);
  endtask

  task automatic drain();
    int t = 0;
    while ((exp_q.size() > 0 || nbytes >= 0) && t < 200000) begin @(negedge clk); t++; end
    check(exp_q.size() == 0, $sformatf("%0d events missing", exp_q.size()));
    exp_q.delete();
  endtask

  task automatic set_links(input int m);
    nl_rx = (m % 3 == 0) ? 1 : (m % 3 == 1) ? 2 : 4;
    rx_hold = 1;   // the links are not decoded while they change set-up
    aligned = 0;
    // m / 3 = line rate: SDR at 160 MHz, DDR at 160 MHz, DDR at 320 MHz
    wr(1, 0, 16'({(m >= 6), (m >= 3), 2'(m % 3)}));
    repeat (40) @(negedge clk);
    mode_idx = m;
    rx_hold = 0;
    repeat (60) @(negedge clk);
    check(aligned, "link aligned");
  endtask

  initial begin
    logic [15:0] rx;
    // decode table
    for (int r = 0; r < 2; r++) begin
      for (int v = 0; v < 256; v++) begin
        logic rdv;
        rdv = r[0];
        dec_k[encode(0, 8'(v), rdv)] = {2'b00, 8'(v)};
      end
      for (int y = 0; y < 8; y++) begin
        logic rdv;
        rdv = r[0];
        dec_k[encode(1, {3'(y), 5'd28}, rdv)] = {2'b01, 3'(y), 5'd28};
      end
    end
    for (int r = 0; r < 2; r++) begin
      logic rdv;
      rdv = r[0];
      dec_k[encode(1, K27_7, rdv)] = {2'b01, K27_7};
    end
    t_len = '0; e_len = '0;
    foreach (outstanding[c]) outstanding[c] = 0;
    #1 rst_n = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (40) @(negedge clk);

    // ---- SPI: configuration write and read-back ----
    wr(0, 5, 16'h0013);            // ch 5: S&H, sample_time 1, enabled
    wr(0, 6, 16'h001F);            // ch 6: S&H, sample_time 7, enabled
    wr(0, 9, 16'h0030);            // ch 9: ToT, enabled, test pulse enabled
    wr(1, 1, 16'h000C);            // test pulse length 13 clocks
    spi(1, 0, 5, 16'h0, rx);
    check(rx == 16'h0013, $sformatf("SPI read-back %h", rx)); n_spi_rd++;
    spi(1, 1, 1, 16'h0, rx);
    check(rx == 16'h000C, "SPI global read-back"); n_spi_rd++;
    check(ch_cfg_out[6] == 16'h001F && ch_cfg_out[7] == 16'h0010, "channel configuration outputs");

    // ---- burst on 1 SDR link: all channels at once ----
    set_links(0);
    frame_cyc.delete();
    hits('1, 6);
    drain();
    check(frame_cyc.size() == 64, "burst frames");
    for (int i = 30; i < frame_cyc.size(); i++)
      check(frame_cyc[i] - frame_cyc[i-1] == 90, $sformatf("frame spacing %0d", frame_cyc[i] - frame_cyc[i-1]));

    // ---- every link set-up, random hits ----
    for (int m = 0; m < 9; m++) begin
      set_links(m);
      for (int n = 0; n < 12; n++) begin
        hits(N'({$urandom, $urandom}) & N'({$urandom, $urandom}), 2 + int'($urandom % 30));
        repeat (int'($urandom % 300)) @(negedge clk);
      end
      drain();
    end

    // ---- single and double threshold: slow edge 7 clocks after the fast one ----
    wr(0, 10, 16'h8010);           // ch 10: ToT, single threshold, enabled
    check(ch_cfg_out[10] == 16'h8010, "single-threshold configuration");
    for (int n = 0; n < 6; n++) begin
      hits((N'(1) << 10) | (N'(1) << 11) | (N'(1) << 5), 3 + n, 0, 7);
      repeat (700) @(negedge clk);
    end
    drain();

    // ---- buffer overflow on channel 3 ----
    begin
      int lost0;
      lost0 = int'(lost_hits);
      // four hits with long ramps keep all buffers of channel 3 busy
      for (int i = 0; i < 4; i++) hits(N'(1) << 3, 3, 1000);
      repeat (2) @(negedge clk);
      trig_t[3] = 1; trig_e[3] = 1;
      repeat (3) @(negedge clk);
      trig_t[3] = 0; trig_e[3] = 0;
      repeat (3) @(negedge clk);
      check(int'(lost_hits) == lost0 + 1, $sformatf("lost hits %0d", lost_hits));
      drain();
    end

    // ---- calibration pulse on channel 9 ----
    begin
      int w;
      w = 0;
      @(negedge clk) tp_in = 1;
      repeat (30) begin
        @(negedge clk);
        if (tp_out != 0) begin
          w++;
          check(tp_out == (N'(1) << 9), "test pulse mask");
        end
      end
      tp_in = 0;
      check(w == 13, $sformatf("test pulse width %0d", w));
      if (w == 13) n_cal++;
    end

    // ---- configuration upset ----
    @(negedge clk);
    dut.u_cfg.mem[5][7] = ~dut.u_cfg.mem[5][7];
    #1;
    check(ch_cfg_out[5] == 16'h0013, "upset corrected on the fly");
    repeat (80) @(negedge clk);
    check(cfg_err == 2'b01, "single upset flagged");
    check(dut.u_cfg.mem[5] == ham_encode(16'h0013), "upset scrubbed");
    if (cfg_err == 2'b01) n_seu++;
    hits(N'(1) << 5, 3);            // channel 5 still samples
    drain();

    // ---- mechanism coverage ----
    $display("ToT hits %0d, S&H hits %0d, lost %0d, FIFO-full cycles %0d, contention cycles %0d",
             n_tot, n_sh, lost_hits, n_burst_full, n_contend);
    $display("SPI reads %0d, test pulses %0d, corrected upsets %0d, events received %0d, single-threshold hits %0d",
             n_spi_rd, n_cal, n_seu, n_rx, n_single);
    $display("events per link set-up (1/2/4 links at 160, 320, 640 Mb/s): %0d %0d %0d / %0d %0d %0d / %0d %0d %0d",
             mode_rx[0], mode_rx[1], mode_rx[2], mode_rx[3], mode_rx[4], mode_rx[5],
             mode_rx[6], mode_rx[7], mode_rx[8]);
    check(n_tot > 0, "no ToT hit");
    check(n_sh > 0, "no S&H hit");
    check(n_single > 0, "no single-threshold hit");
    check(lost_hits > 0, "no lost hit");
    check(n_burst_full > 0, "FIFO never full");
    check(n_contend > 0, "no arbitration contention");
    check(n_spi_rd > 0 && n_cal > 0 && n_seu > 0, "SPI read, test pulse or upset missing");
    for (int m = 0; m < 9; m++) check(mode_rx[m] > 0, $sformatf("link set-up %0d unused", m));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
