// spi_slave: serial configuration port (SPI mode 0, MSB first) into the
// 16-bit parameter/configuration bus.
//
// A frame is 32 bits while cs_n is low: bit 31 = 1 for a write, bits 30:16
// the word address (the bus address is {1'b0, addr[14:0]}), bits 15:0 data.
// A write pulses wr_en for one clock after the 32nd rising sclk edge. For a
// read (bit 31 = 0) the word at the address is captured after the 16th bit
// and shifted out on miso, MSB first, during bits 15:0 (miso changes after
// falling sclk edges). sclk, cs_n and mosi are sampled by two-flop
// synchronisers in the core clock, so sclk must be slower than clk/4.
// The paper names an SPI port (0.04 kB of SPI-loaded storage) but gives no
// frame format; the format here is this design's.
module spi_slave (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sclk,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        miso,
  output logic        wr_en,
  output logic [15:0] addr,
  output logic [15:0] wdata,
  input  logic [15:0] rdata
);
  logic [2:0] sclk_s, cs_s;
  logic [1:0] mosi_s;
  logic [31:0] sh;
  logic [5:0]  cnt;
  logic [15:0] tx;
  logic        is_wr;
  logic        load;     // capture rdata one clock after the address is complete

  wire rise = sclk_s[1] && !sclk_s[2];
  wire fall = !sclk_s[1] && sclk_s[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0; cs_s <= '1; mosi_s <= '0;
      sh <= '0; cnt <= '0; tx <= '0; is_wr <= 1'b0; load <= 1'b0;
      wr_en <= 1'b0; addr <= '0; wdata <= '0; miso <= 1'b0;
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[0], mosi};
      wr_en  <= 1'b0;
      load   <= 1'b0;
      if (cs_s[1]) begin
        cnt  <= '0;
        miso <= 1'b0;
      end else begin
        if (rise && cnt < 6'd32) begin
          sh  <= {sh[30:0], mosi_s[1]};
          cnt <= cnt + 6'd1;
          if (cnt == 6'd0) is_wr <= mosi_s[1];
          if (cnt == 6'd15) addr <= {1'b0, sh[13:0], mosi_s[1]};
          load <= (cnt == 6'd15);
          if (cnt == 6'd31 && is_wr) begin
            wdata <= {sh[14:0], mosi_s[1]};
            wr_en <= 1'b1;
          end
        end
        if (load) tx <= rdata;
        if (fall && cnt >= 6'd16 && cnt < 6'd32 && !is_wr) begin
          miso <= tx[15];
          tx   <= {tx[14:0], 1'b0};
        end
      end
    end
  end
endmodule
