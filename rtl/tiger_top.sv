// tiger_top: digital core of the TIGER 64-channel GEM readout ASIC.
//
// Each of the N_CH channels has an analogue front-end (charge amplifier, a
// fast shaper for timing and a slow shaper for energy, two discriminators,
// quad time interpolators and a quad sample-and-hold) that sits outside this
// RTL and talks to it through the trig_*, *_cmp, buf_sel, sh_sample, *_conv
// and conv_slot ports.  Inside:
//   * a 16-bit coarse time counter at the 160 MHz system clock, shared by all
//     channels;
//   * one channel_ctrl per channel: four event buffers, ToT or S&H mode, two
//     Wilkinson ADC counters (T fine time; E fine time or amplitude);
//   * the back-end: round-robin event_arbiter over the channels, a sync_fifo
//     of 64-bit event words, frame_tx striping K27.7-framed events over 1, 2 or
//     4 links, one enc8b10b and one serializer per link (SDR or DDR);
//   * spi_slave + config_bank: SPI access to Hamming-protected channel and
//     global configuration words; the analogue settings (thresholds, bias DAC
//     codes) leave on ch_cfg_out / glb_cfg_out;
//   * calib_pulse: programmable test pulses to the enabled channels.
// Event word (MSB first): channel[6], buffer[2], mode_sh, t_coarse[16],
// e_coarse[16], t_fine[10], e_fine[10], 3 zero bits.  Global word 0 holds the
// link set-up (bits [1:0] link count code, bit 2 DDR, bit 3 transmit clock at
// twice the system clock), word 1 bits [7:0] the
// test pulse length, words 2..3 are bias DAC codes.  All of it is clocked by
// clk with one asynchronous active-low reset.  The set of functions (64
// channels, two measurement modes, four buffers, 10-bit Wilkinson conversion,
// TMR and Hamming protection, SPI, 8b/10b over up to four SDR/DDR links, test
// pulses) follows the chip; the event word, framing, FIFO and arbitration are
// this design's choices.  Each link hands four line bits per system clock to
// its output stage (tx_bits[l][3] first), so a link carries 160, 320 or
// 640 Mb/s: SDR or DDR with a transmit clock of 160 or 320 MHz.
module tiger_top
  import tiger_pkg::*;
#(
  parameter int unsigned N_CH       = 64,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // SPI configuration
  input  logic                        spi_sclk,
  input  logic                        spi_csn,
  input  logic                        spi_mosi,
  output logic                        spi_miso,
  // calibration request
  input  logic                        tp_in,
  // analogue channel interface
  input  logic [N_CH-1:0]             trig_t,
  input  logic [N_CH-1:0]             trig_e,
  input  logic [N_CH-1:0]             t_cmp,
  input  logic [N_CH-1:0]             e_cmp,
  output logic [N_CH-1:0][1:0]        buf_sel,
  output logic [N_CH-1:0][N_BUF-1:0]  sh_sample,
  output logic [N_CH-1:0]             t_conv,
  output logic [N_CH-1:0]             e_conv,
  output logic [N_CH-1:0][1:0]        conv_slot,
  output logic [N_CH-1:0]             tp_out,
  output logic [N_CH-1:0][CFG_W-1:0]  ch_cfg_out,
  output logic [3:0][CFG_W-1:0]       glb_cfg_out,
  // data links (to the LVDS drivers)
  output logic [3:0][3:0]             tx_bits,
  // status
  output logic [1:0]                  cfg_err,
  output logic [15:0]                 lost_hits
);
  localparam int unsigned IW = $clog2(N_CH);

  // ---------------- configuration ----------------
  logic        wr_en, wr_glb, rd_glb;
  logic [5:0]  wr_addr, rd_addr;
  logic [15:0] wr_data, rd_data;
  logic [3:0][CFG_W-1:0] glb_cfg;
  ch_cfg_t     ch_cfg [N_CH];
  glb_link_t   link_cfg;

  spi_slave u_spi (
    .clk, .rst_n, .sclk(spi_sclk), .csn(spi_csn), .mosi(spi_mosi), .miso(spi_miso),
    .wr_en, .wr_glb, .wr_addr, .wr_data, .rd_glb, .rd_addr, .rd_data);

  config_bank #(.N_CH(N_CH), .N_GLB(4)) u_cfg (
    .clk, .rst_n, .wr_en, .wr_glb, .wr_addr, .wr_data, .rd_glb, .rd_addr, .rd_data,
    .ch_cfg(ch_cfg_out), .glb_cfg, .err_corr(cfg_err[0]), .err_uncorr(cfg_err[1]));

  assign glb_cfg_out = glb_cfg;
  assign link_cfg    = glb_link_t'(glb_cfg[0]);

  // ---------------- coarse time ----------------
  logic [COARSE_W-1:0] coarse;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) coarse <= '0;
    else        coarse <= coarse + 1'b1;
  end

  // ---------------- calibration ----------------
  logic [N_CH-1:0] tp_en;
  for (genvar c = 0; c < N_CH; c++) begin : g_tpen
    assign ch_cfg[c] = ch_cfg_t'(ch_cfg_out[c]);
    assign tp_en[c]  = ch_cfg[c].tp_en;
  end

  calib_pulse #(.N_CH(N_CH)) u_cal (
    .clk, .rst_n, .tp_in, .tp_len(glb_cfg[1][7:0]), .tp_en, .tp_out);

  // ---------------- channels ----------------
  logic [N_CH-1:0] ev_valid, ev_ack, lost;
  ch_event_t       ch_ev [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    channel_ctrl u_ch (
      .clk, .rst_n, .cfg(ch_cfg[c]), .coarse,
      .trig_t(trig_t[c]), .trig_e(trig_e[c]),
      .buf_sel(buf_sel[c]), .sh_sample(sh_sample[c]),
      .t_conv(t_conv[c]), .e_conv(e_conv[c]), .conv_slot(conv_slot[c]),
      .t_cmp(t_cmp[c]), .e_cmp(e_cmp[c]),
      .ev_valid(ev_valid[c]), .ev(ch_ev[c]), .ev_ack(ev_ack[c]), .lost(lost[c]));
  end

  // lost-hit counter (saturating)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lost_hits <= '0;
    else if (|lost) begin
      if (17'(lost_hits) + 17'($countones(lost)) > 17'hFFFF) lost_hits <= '1;
      else lost_hits <= lost_hits + 16'($countones(lost));
    end
  end

  // ---------------- back-end collection ----------------
  logic [N_CH-1:0] gnt;
  logic [IW-1:0]   gnt_idx;
  logic            gnt_valid, fifo_full, fifo_empty, fifo_pop;
  logic [EV_W-1:0] fifo_din, fifo_dout;
  event_t          ev_word;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;   // occupancy, for observation

  wire take = gnt_valid && !fifo_full;

  event_arbiter #(.N_CH(N_CH)) u_arb (
    .clk, .rst_n, .req(ev_valid), .advance(take), .gnt, .gnt_idx, .gnt_valid);

  assign ev_ack = take ? gnt : '0;

  always_comb begin
    ev_word          = '0;
    ev_word.channel  = 6'(gnt_idx);
    ev_word.buffer   = ch_ev[gnt_idx].buffer;
    ev_word.mode_sh  = ch_ev[gnt_idx].mode_sh;
    ev_word.t_coarse = ch_ev[gnt_idx].t_coarse;
    ev_word.e_coarse = ch_ev[gnt_idx].e_coarse;
    ev_word.t_fine   = ch_ev[gnt_idx].t_fine;
    ev_word.e_fine   = ch_ev[gnt_idx].e_fine;
    fifo_din         = ev_word;
  end

  sync_fifo #(.W(EV_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push(take), .din(fifo_din), .pop(fifo_pop), .dout(fifo_dout),
    .full(fifo_full), .empty(fifo_empty), .count(fifo_count));

  // ---------------- transmission ----------------
  logic            sym_tick, sym_tick_q;
  logic [3:0][7:0] lane_data;
  logic [3:0]      lane_k;
  logic [3:0][9:0] sym;
  logic [1:0]      tx_rate;   // line bits per clock: 0: 1, 1: 2, 2: 4

  assign tx_rate = 2'(link_cfg.ddr) + 2'(link_cfg.tx_x2);

  frame_tx u_tx (
    .clk, .rst_n, .ev(fifo_dout), .ev_valid(!fifo_empty), .ev_pop(fifo_pop),
    .n_links(link_cfg.n_links), .rate(tx_rate), .sym_tick,
    .lane_data, .lane_k);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sym_tick_q <= 1'b0;
    else        sym_tick_q <= sym_tick;
  end

  for (genvar l = 0; l < 4; l++) begin : g_link
    logic rd_unused;
    enc8b10b u_enc (
      .clk, .rst_n, .en(sym_tick), .k(lane_k[l]), .din(lane_data[l]),
      .dout(sym[l]), .rd(rd_unused));
    serializer u_ser (
      .clk, .rst_n, .rate(tx_rate), .load(sym_tick_q), .sym(sym[l]),
      .tx_bits(tx_bits[l]));
  end
endmodule
