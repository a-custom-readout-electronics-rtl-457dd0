// spi_slave: SPI port for configuration upload and download.
//
// SPI mode 0 (data sampled on the rising SCLK edge, changed on the falling
// edge), most significant bit first, chip select active low.  The three pins
// are synchronised to the system clock with two flip-flops, so each SCLK
// phase must last at least four system clocks.  A transaction is 24 bits:
//   command  [7] read (1) / write (0), [6] global (1) / channel (0),
//            [5:0] channel number or global word index
//   data     16 bits: written on MOSI, or returned on MISO for a read.
// A write reaches the register bank as a one-cycle wr_en pulse after the 24th
// bit.  For a read, rd_glb/rd_addr are presented after the 8th bit and the
// word is shifted out from the next falling SCLK edge.  Raising CSN aborts a
// transaction.  The transaction state is held in a triplicated register.  The
// chip uses SPI for configuration; the frame format is this design's.
module spi_slave (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sclk,
  input  logic        csn,
  input  logic        mosi,
  output logic        miso,
  output logic        wr_en,
  output logic        wr_glb,
  output logic [5:0]  wr_addr,
  output logic [15:0] wr_data,
  output logic        rd_glb,
  output logic [5:0]  rd_addr,
  input  logic [15:0] rd_data
);
  logic [2:0] sclk_s, csn_s, mosi_s;   // [0] first stage, [2] previous value
  logic       rise, fall, sel;
  logic [4:0] cnt_d, cnt_q;            // bits received, in TMR
  logic [7:0] cmd;
  logic [15:0] din, dout;
  logic        load_rd;

  tmr_reg #(.W(5)) u_cnt (.clk, .rst_n, .d(cnt_d), .q(cnt_q));

  assign rise = sclk_s[1] & ~sclk_s[2];
  assign fall = ~sclk_s[1] & sclk_s[2];
  assign sel  = ~csn_s[1];

  always_comb begin
    cnt_d = cnt_q;
    if (!sel)                   cnt_d = '0;
    else if (rise && cnt_q != 5'd24) cnt_d = cnt_q + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s  <= '0;
      csn_s   <= '1;
      mosi_s  <= '0;
      cmd     <= '0;
      din     <= '0;
      dout    <= '0;
      miso    <= 1'b0;
      wr_en   <= 1'b0;
      load_rd <= 1'b0;
    end else begin
      sclk_s  <= {sclk_s[1:0], sclk};
      csn_s   <= {csn_s[1:0], csn};
      mosi_s  <= {mosi_s[1:0], mosi};
      wr_en   <= 1'b0;
      load_rd <= 1'b0;
      if (!sel) begin
        miso <= 1'b0;
      end else begin
        if (rise) begin
          if (cnt_q < 5'd8) cmd <= {cmd[6:0], mosi_s[1]};
          else if (cnt_q < 5'd24) din <= {din[14:0], mosi_s[1]};
          if (cnt_q == 5'd7) load_rd <= 1'b1;
          if (cnt_q == 5'd23 && !cmd[7]) wr_en <= 1'b1;
        end
        if (load_rd) dout <= rd_data;
        else if (fall && cnt_q >= 5'd8 && cnt_q < 5'd24) begin
          miso <= dout[15];
          dout <= {dout[14:0], 1'b0};
        end
      end
    end
  end

  assign wr_glb  = cmd[6];
  assign wr_addr = cmd[5:0];
  assign wr_data = din;
  assign rd_glb  = cmd[6];
  assign rd_addr = cmd[5:0];
endmodule
