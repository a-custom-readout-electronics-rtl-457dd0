// config_bank: Hamming-protected configuration registers.
//
// Holds one 16-bit configuration word per channel and N_GLB global words.
// Every word is stored as a (22,16) extended Hamming codeword (SEC-DED, see
// tiger_pkg), so a single upset bit is corrected on the fly and a double one
// is detected.  The decoded values drive the channels and the periphery all
// the time.  A scrubber visits one word per clock and writes back the
// corrected codeword whenever it finds a single-bit error.  err_corr and
// err_uncorr are sticky flags, cleared by any write.  Writes take effect at the
// next clock edge; reads (rd_glb/rd_addr -> rd_data) are combinational.
//
// Hamming protection of the configuration follows the chip; the code, the
// word organisation and the scrubber are choices of this design.
module config_bank
  import tiger_pkg::*;
#(
  parameter int unsigned N_CH  = 64,
  parameter int unsigned N_GLB = 4,
  parameter logic [CFG_W-1:0] CH_RST  = 16'h0010,   // channel enabled, ToT
  parameter logic [CFG_W-1:0] GLB_RST = 16'h0000
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic                     wr_glb,
  input  logic [5:0]               wr_addr,
  input  logic [CFG_W-1:0]         wr_data,
  input  logic                     rd_glb,
  input  logic [5:0]               rd_addr,
  output logic [CFG_W-1:0]         rd_data,
  output logic [N_CH-1:0][CFG_W-1:0]  ch_cfg,
  output logic [N_GLB-1:0][CFG_W-1:0] glb_cfg,
  output logic                     err_corr,
  output logic                     err_uncorr
);
  localparam int unsigned N_W = N_CH + N_GLB;
  localparam int unsigned AW  = $clog2(N_W);

  localparam logic [HAM_W-1:0] CH_RST_C  = ham_encode(CH_RST);
  localparam logic [HAM_W-1:0] GLB_RST_C = ham_encode(GLB_RST);

  logic [HAM_W-1:0] mem [N_W];
  ham_result_t      dec [N_W];
  logic [AW-1:0]    scrub;

  for (genvar i = 0; i < N_W; i++) begin : g_dec
    assign dec[i] = ham_decode(mem[i]);
  end
  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    assign ch_cfg[i] = dec[i].data;
  end
  for (genvar i = 0; i < N_GLB; i++) begin : g_glb
    assign glb_cfg[i] = dec[N_CH+i].data;
  end

  function automatic int unsigned widx(input logic glb, input logic [5:0] a);
    return glb ? N_CH + (int'(a) % N_GLB) : int'(a) % N_CH;
  endfunction

  wire [AW-1:0] w_i = AW'(widx(wr_glb, wr_addr));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_W; i++)
        mem[i] <= (i < N_CH) ? CH_RST_C : GLB_RST_C;
      scrub      <= '0;
      err_corr   <= 1'b0;
      err_uncorr <= 1'b0;
    end else begin
      scrub <= (32'(scrub) == N_W - 1) ? '0 : scrub + 1'b1;
      if (dec[scrub].corrected && !(wr_en && w_i == scrub))
        mem[scrub] <= ham_encode(dec[scrub].data);
      for (int i = 0; i < N_W; i++) begin
        if (dec[i].corrected)     err_corr   <= 1'b1;
        if (dec[i].uncorrectable) err_uncorr <= 1'b1;
      end
      if (wr_en) begin
        mem[w_i]   <= ham_encode(wr_data);
        err_corr   <= 1'b0;
        err_uncorr <= 1'b0;
      end
    end
  end

  assign rd_data = dec[widx(rd_glb, rd_addr)].data;
endmodule
