// tiger_pkg: types, constants and coding functions shared by the TIGER
// readout logic.
//
// Holds the event record a channel hands to the back-end, the bit fields of
// the 16-bit channel and global configuration words, the (22,16) extended
// Hamming code that protects those words, and the K-characters of the 8b/10b
// link framing.  The 160 MHz clock, the 10-bit ADC, the four buffers per
// channel and the 25 ns sampling-time step follow the chip description; field
// widths and codes not given there are choices of this design.
package tiger_pkg;

  localparam int unsigned ADC_BITS  = 10;   // Wilkinson ADC resolution
  localparam int unsigned N_BUF     = 4;    // quad-buffered TDC / S&H
  localparam int unsigned COARSE_W  = 16;   // coarse time counter width
  localparam int unsigned CFG_W     = 16;   // configuration word width
  localparam int unsigned HAM_W     = 22;   // SEC-DED codeword width
  localparam int unsigned SH_STEP   = 4;    // 25 ns in 160 MHz cycles
  localparam int unsigned EV_W      = 64;   // packed event width

  // Channel configuration word (one per channel).
  typedef struct packed {
    logic       single_thr;   // ToT: 1 = both edges from the fast discriminator
    logic [3:0] vth_e;        // slow-branch threshold DAC code (analogue)
    logic [4:0] vth_t;        // fast-branch threshold DAC code (analogue)
    logic       tp_en;        // test pulse enable
    logic       enable;       // channel enable
    logic [2:0] sample_time;  // S&H window = (sample_time+1) * 25 ns
    logic       mode_sh;      // 1: sample-and-hold, 0: time-over-threshold
  } ch_cfg_t;

  // Global configuration word 0: link set-up.  Words 1..3 hold bias DAC codes
  // and the test pulse length.
  typedef struct packed {
    logic [11:0] reserved;
    logic        tx_x2;       // 1: transmit clock at twice the system clock
    logic        ddr;         // 1: double data rate
    logic [1:0]  n_links;     // 0: 1 link, 1: 2 links, 2 and 3: 4 links
  } glb_link_t;

  // Event record of one hit.
  typedef struct packed {
    logic [5:0]            channel;
    logic [1:0]            buffer;
    logic                  mode_sh;
    logic [COARSE_W-1:0]   t_coarse;
    logic [COARSE_W-1:0]   e_coarse;
    logic [ADC_BITS-1:0]   t_fine;
    logic [ADC_BITS-1:0]   e_fine;   // E fine time (ToT) or amplitude (S&H)
    logic [2:0]            pad;
  } event_t;

  typedef struct packed {
    logic [1:0]            buffer;
    logic                  mode_sh;
    logic [COARSE_W-1:0]   t_coarse;
    logic [COARSE_W-1:0]   e_coarse;
    logic [ADC_BITS-1:0]   t_fine;
    logic [ADC_BITS-1:0]   e_fine;
  } ch_event_t;

  // 8b/10b control characters used by the link framing.
  localparam logic [7:0] K28_5 = 8'hBC;  // idle / comma
  localparam logic [7:0] K27_7 = 8'hFB;  // start of event frame

  // ---------------------------------------------------------------------
  // Extended Hamming (22,16): codeword bit positions 1..21 follow the
  // classic layout with parity bits at 1,2,4,8,16; bit 0 is overall parity.
  // ---------------------------------------------------------------------
  function automatic logic [HAM_W-1:0] ham_encode(input logic [CFG_W-1:0] d);
    logic [HAM_W-1:0] c;
    int unsigned k;
    c = '0;
    k = 0;
    for (int unsigned p = 1; p < HAM_W; p++) begin
      if ((p & (p - 1)) != 0) begin
        c[p] = d[k];
        k++;
      end
    end
    for (int unsigned b = 0; b < 5; b++) begin
      logic par;
      par = 1'b0;
      for (int unsigned p = 1; p < HAM_W; p++)
        if (((p >> b) & 1) == 1 && p != (1 << b)) par ^= c[p];
      c[1 << b] = par;
    end
    c[0] = ^c[HAM_W-1:1];
    return c;
  endfunction

  typedef struct packed {
    logic [CFG_W-1:0] data;
    logic             corrected;    // a single bit was wrong and is fixed
    logic             uncorrectable; // two bits wrong
  } ham_result_t;

  function automatic ham_result_t ham_decode(input logic [HAM_W-1:0] c_in);
    ham_result_t r;
    logic [HAM_W-1:0] c;
    logic [4:0] syn;
    logic       overall;
    int unsigned k;
    c = c_in;
    syn = '0;
    for (int unsigned p = 1; p < HAM_W; p++)
      if (c[p]) syn ^= 5'(p);
    overall = ^c;
    r.corrected = 1'b0;
    r.uncorrectable = 1'b0;
    if (syn != 0 && overall) begin
      if (syn < 5'(HAM_W)) c[syn] = ~c[syn];
      r.corrected = 1'b1;
    end else if (syn != 0 && !overall) begin
      r.uncorrectable = 1'b1;
    end else if (syn == 0 && overall) begin
      r.corrected = 1'b1;            // the overall parity bit itself flipped
    end
    r.data = '0;
    k = 0;
    for (int unsigned p = 1; p < HAM_W; p++) begin
      if ((p & (p - 1)) != 0) begin
        r.data[k] = c[p];
        k++;
      end
    end
    return r;
  endfunction

  // Bitwise two-out-of-three majority.
  function automatic logic [63:0] vote3(input logic [63:0] a, input logic [63:0] b,
                                        input logic [63:0] c);
    return (a & b) | (a & c) | (b & c);
  endfunction

endpackage
