// channel_ctrl: control logic of one TIGER channel (the "Control Logic" box of
// the channel block diagram).
//
// Every hit owns one of four buffers.  A buffer is the set of analogue
// storage elements of one event: a time interpolator for the fast-branch
// trigger, a second interpolator for the trailing edge (ToT mode) and
// a sample-and-hold capacitor (S&H mode).  Buffers are used in ring order:
//
//   FREE -> (fast trigger rises) WAIT_E -> (E phase ends) WAIT_CONV
//        -> (both ADCs start) CONV -> (both ADCs done) DONE -> (read) FREE
//
// On the rising edge of trig_t the coarse time is latched as t_coarse and
// buf_sel advances, arming the next buffer.  The E phase ends:
//   * in ToT mode on the falling edge of trig_e (double threshold) or of
//     trig_t (single threshold, cfg.single_thr), latching e_coarse;
//   * in S&H mode after (sample_time+1) x 25 ns (4 clocks per step), when the
//     buffer's sh_sample switch opens and the capacitor holds the peak;
//     e_coarse then records the hold time.
// Conversions run in ring order: the T Wilkinson ADC converts the buffer's T
// interpolator and the E ADC converts either the E interpolator (ToT) or the
// S&H capacitor (S&H), both started together by t_conv/e_conv with conv_slot
// naming the buffer.  The oldest DONE buffer is offered on ev_valid/ev and
// released by ev_ack (ev is stable while ev_valid is high).  A fast trigger
// that finds no free buffer is dropped and signalled on `lost`.
//
// The four buffers, the two measurement modes, single or double threshold in
// ToT mode, the 25 ns step and the shared
// use of the E ADC follow the chip.  Ring-order allocation, the synchronous
// treatment of the discriminator outputs, dropping hits on overflow and the
// handshake are choices of this design.  The buffer state registers are
// triplicated (tmr_reg).
module channel_ctrl
  import tiger_pkg::*;
#(
  parameter int unsigned N_BUF_P    = N_BUF,
  parameter int unsigned COARSE_WP  = COARSE_W,
  parameter int unsigned STEP_CYC   = SH_STEP
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  ch_cfg_t               cfg,
  input  logic [COARSE_WP-1:0]  coarse,
  input  logic                  trig_t,
  input  logic                  trig_e,
  // analogue buffer control
  output logic [1:0]            buf_sel,
  output logic [N_BUF_P-1:0]    sh_sample,
  output logic                  t_conv,
  output logic                  e_conv,
  output logic [1:0]            conv_slot,
  input  logic                  t_cmp,
  input  logic                  e_cmp,
  // event output
  output logic                  ev_valid,
  output ch_event_t             ev,
  input  logic                  ev_ack,
  output logic                  lost
);
  typedef enum logic [2:0] {
    S_FREE = 3'd0, S_WAIT_E = 3'd1, S_WAIT_CONV = 3'd2, S_CONV = 3'd3, S_DONE = 3'd4
  } buf_state_t;

  localparam int unsigned SH_CNT_W = 6;

  buf_state_t              st_q [N_BUF_P];
  buf_state_t              st_d [N_BUF_P];
  logic [COARSE_WP-1:0]    tco  [N_BUF_P];
  logic [COARSE_WP-1:0]    eco  [N_BUF_P];
  logic [ADC_BITS-1:0]     tfi  [N_BUF_P];
  logic [ADC_BITS-1:0]     efi  [N_BUF_P];
  logic                    msh  [N_BUF_P];
  logic                    sth  [N_BUF_P];   // single threshold (ToT)
  logic [SH_CNT_W-1:0]     shc  [N_BUF_P];

  logic [1:0] alloc_ptr, e_ptr, c_ptr, rd_ptr;
  logic       trig_t_q, trig_e_q;
  logic       t_rise, t_fall, e_fall;
  logic       t_busy, e_busy, t_done, e_done;
  logic [ADC_BITS-1:0] t_code, e_code;
  logic       t_got, e_got;       // which ADC of the current conversion finished

  // triplicated buffer state registers
  for (genvar b = 0; b < N_BUF_P; b++) begin : g_state
    logic [2:0] q;
    tmr_reg #(.W(3), .RST_VAL(3'(S_FREE))) u_st (
      .clk, .rst_n, .d(3'(st_d[b])), .q(q));
    assign st_q[b] = buf_state_t'(q);
  end

  assign t_rise = trig_t & ~trig_t_q;
  assign t_fall = ~trig_t & trig_t_q;
  assign e_fall = ~trig_e & trig_e_q;

  wire accept   = t_rise && cfg.enable && (st_q[alloc_ptr] == S_FREE);
  wire end_tot  = (sth[e_ptr] ? t_fall : e_fall) && (st_q[e_ptr] == S_WAIT_E) && !msh[e_ptr];
  wire end_sh   = (st_q[e_ptr] == S_WAIT_E) && msh[e_ptr] && (shc[e_ptr] == '0);
  wire conv_go  = (st_q[c_ptr] == S_WAIT_CONV) && !t_busy && !e_busy && !t_conv;
  wire conv_fin = (st_q[c_ptr] == S_CONV) && (t_got || t_done) && (e_got || e_done);
  wire rd_fire  = ev_valid && ev_ack;

  always_comb begin
    for (int b = 0; b < N_BUF_P; b++) st_d[b] = st_q[b];
    if (accept)             st_d[alloc_ptr] = S_WAIT_E;
    if (end_tot || end_sh)  st_d[e_ptr]     = S_WAIT_CONV;
    if (conv_go)            st_d[c_ptr]     = S_CONV;
    if (conv_fin)           st_d[c_ptr]     = S_DONE;
    if (rd_fire)            st_d[rd_ptr]    = S_FREE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_t_q  <= 1'b0;
      trig_e_q  <= 1'b0;
      alloc_ptr <= '0;
      e_ptr     <= '0;
      c_ptr     <= '0;
      rd_ptr    <= '0;
      t_conv    <= 1'b0;
      e_conv    <= 1'b0;
      t_got     <= 1'b0;
      e_got     <= 1'b0;
      lost      <= 1'b0;
      for (int b = 0; b < N_BUF_P; b++) begin
        tco[b] <= '0; eco[b] <= '0; tfi[b] <= '0; efi[b] <= '0;
        msh[b] <= 1'b0; sth[b] <= 1'b0; shc[b] <= '0;
      end
    end else begin
      trig_t_q <= trig_t;
      trig_e_q <= trig_e;
      lost     <= t_rise && cfg.enable && (st_q[alloc_ptr] != S_FREE);
      t_conv   <= conv_go;
      e_conv   <= conv_go;
      for (int b = 0; b < N_BUF_P; b++)
        if (st_q[b] == S_WAIT_E && msh[b] && shc[b] != '0) shc[b] <= shc[b] - 1'b1;
      if (accept) begin
        tco[alloc_ptr] <= coarse;
        msh[alloc_ptr] <= cfg.mode_sh;
        sth[alloc_ptr] <= cfg.single_thr;
        shc[alloc_ptr] <= SH_CNT_W'((32'(cfg.sample_time) + 1) * STEP_CYC - 1);
        alloc_ptr      <= alloc_ptr + 1'b1;
      end
      if (end_tot || end_sh) begin
        eco[e_ptr] <= coarse;
        e_ptr      <= e_ptr + 1'b1;
      end
      if (conv_go) begin
        t_got <= 1'b0;
        e_got <= 1'b0;
      end else if (st_q[c_ptr] == S_CONV) begin
        if (t_done) begin tfi[c_ptr] <= t_code; t_got <= 1'b1; end
        if (e_done) begin efi[c_ptr] <= e_code; e_got <= 1'b1; end
      end
      if (conv_fin) c_ptr <= c_ptr + 1'b1;
      if (rd_fire)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  assign conv_slot = c_ptr;
  assign buf_sel   = alloc_ptr;

  // S&H switch of each capacitor: tracks the slow shaper while its buffer is
  // in the sampling window, holds otherwise.
  always_comb begin
    for (int b = 0; b < N_BUF_P; b++)
      sh_sample[b] = (st_q[b] == S_WAIT_E) && msh[b];
  end

  wilkinson_adc #(.ADC_BITS(ADC_BITS)) u_tadc (
    .clk, .rst_n, .start(t_conv), .cmp(t_cmp), .busy(t_busy), .done(t_done), .code(t_code));
  wilkinson_adc #(.ADC_BITS(ADC_BITS)) u_eadc (
    .clk, .rst_n, .start(e_conv), .cmp(e_cmp), .busy(e_busy), .done(e_done), .code(e_code));

  assign ev_valid    = (st_q[rd_ptr] == S_DONE);
  assign ev.buffer   = rd_ptr;
  assign ev.mode_sh  = msh[rd_ptr];
  assign ev.t_coarse = tco[rd_ptr];
  assign ev.e_coarse = eco[rd_ptr];
  assign ev.t_fine   = tfi[rd_ptr];
  assign ev.e_fine   = efi[rd_ptr];

  // The event must not change while it is offered.
  a_ev_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ev_valid && !ev_ack |=> ev_valid && $stable(ev));
endmodule
