// tb_tiger_rate: sustained-rate test of the full 64-channel core at its
// default parameters.
//
// All 64 channels fire independently, each with a random gap between hits
// whose mean gives the per-channel rate (ToT hits, random widths and ramp
// lengths).  Two cases are run, each on the smallest link set-up whose line
// rate exceeds the event traffic (one frame = 90 line bits):
//   * 100 kHz per channel (6.4 M events/s, 576 Mb/s) on one link at 640 Mb/s;
//   * 60 kHz per channel (3.84 M events/s, 346 Mb/s) on four links at
//     160 Mb/s.
// Each case checks that no hit is lost and that every event arrives on the
// links with the predicted contents.  It prints how many clocks the event
// FIFO was full (the channels then hold their events in their own buffers)
// and the largest latency from the fast trigger to the end of the frame.
module tb_tiger_rate;
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

  // received events, in total and per link set-up; largest latency
  int n_rx = 0, max_lat = 0;
  int mode_rx[9];

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
          // latency from the fast trigger to the end of the frame
          if (int'(16'(coarse - e.t_coarse)) > max_lat) max_lat = int'(16'(coarse - e.t_coarse));
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


  // ---------------- free-running hit sources ----------------
  int outstanding [N];
  int gap [N], hi [N];
  event_t pend [N];
  bit running = 0;
  int mean_gap = 1600;
  int n_fired = 0, n_fifo_full = 0;

  always @(posedge clk) if (dut.fifo_full) n_fifo_full++;

  always @(negedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (hi[c] > 0) begin
        hi[c]--;
        if (hi[c] == 0) begin
          pend[c].e_coarse = coarse;
          exp_q.push_back(pend[c]);
          trig_t[c] = 1'b0;
          trig_e[c] = 1'b0;
        end
      end else if (running) begin
        if (gap[c] > 0) gap[c]--;
        else begin
          logic [1:0] b;
          b = buf_sel[c];
          t_len[c][b] = 11'(1 + $urandom % 500);
          e_len[c][b] = 11'(1 + $urandom % 600);
          pend[c] = '0;
          pend[c].channel = 6'(c);
          pend[c].buffer = b;
          pend[c].t_coarse = coarse;
          pend[c].t_fine = 10'(t_len[c][b]);
          pend[c].e_fine = 10'(e_len[c][b]);
          trig_t[c] = 1'b1;
          trig_e[c] = 1'b1;
          hi[c] = 2 + int'($urandom % 40);
          // gap uniform in [mean/2, 3*mean/2): mean rate 1 / mean_gap
          gap[c] = mean_gap / 2 + int'($urandom % mean_gap) - hi[c];
          outstanding[c]++;
          n_fired++;
        end
      end
    end
  end


  task automatic run_rate(input int m, input int rate_gap, input int clocks, input string what);
    int fired0, rx0, lost0, full0;
    set_links(m);
    fired0 = n_fired; rx0 = n_rx; lost0 = int'(lost_hits); full0 = n_fifo_full;
    mean_gap = rate_gap;
    for (int c = 0; c < N; c++) gap[c] = int'($urandom % rate_gap);
    running = 1;
    repeat (clocks) @(negedge clk);
    running = 0;
    wait (hi.sum() == 0);
    drain();
    $display("%s: %0d hits, %0d events received, %0d lost, %0d FIFO-full cycles, latency up to %0d clocks",
             what, n_fired - fired0, n_rx - rx0, int'(lost_hits) - lost0, n_fifo_full - full0, max_lat);
    check(n_fired - fired0 > 0, {what, ": no hits"});
    check(n_rx - rx0 == n_fired - fired0, {what, ": events received differ from hits"});
    check(int'(lost_hits) == lost0, {what, ": hits lost"});
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
    foreach (hi[c]) begin hi[c] = 0; gap[c] = 0; end
    run_rate(6, 1600, 100000, "100 kHz per channel, 1 link at 640 Mb/s");
    max_lat = 0;
    run_rate(2, 2667, 100000, "60 kHz per channel, 4 links at 160 Mb/s");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
