// spi_if: serial peripheral interface (SPI) slave that gives the host register access.
//
// The prototype macro connects to the test equipment through an SPI port. This module
// provides that port in mode 0: data are sampled on the rising SCLK edge and change on the
// falling edge, most significant bit first, while cs_n is low. A frame is 40 bits:
//   byte 0  : {rw, addr[6:0]}   rw = 1 write, 0 read
//   bytes 1-4: 32-bit data. On a write it comes from the host. On a read the slave returns
//              the register on MISO.
// A write is applied with one bus_we pulse after the 40th bit. A read samples bus_rdata
// two system clocks after the 8th bit, and bus_re pulses then. Raising cs_n aborts a
// frame. SCLK, cs_n and MOSI are brought into the system clock domain with two flip-flops,
// so SCLK may run at up to clk/8. The frame format and the oversampling are this design's
// choices. The paper names the SPI port only.
module spi_if (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sclk,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        miso,
  output logic [6:0]  bus_addr,
  output logic [31:0] bus_wdata,
  output logic        bus_we,
  output logic        bus_re,
  input  logic [31:0] bus_rdata
);

  logic [2:0] sclk_s, cs_s;
  logic [1:0] mosi_s;
  logic       rise, fall, sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0;
      cs_s   <= '1;
      mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[0], mosi};
    end
  end

  assign rise = sclk_s[1] & ~sclk_s[2];
  assign fall = ~sclk_s[1] & sclk_s[2];
  assign sel  = ~cs_s[1];

  logic [5:0]  nbits;
  logic [39:0] rx;
  logic        rw;
  logic [31:0] tx;
  logic        load_tx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nbits     <= '0;
      rx        <= '0;
      rw        <= 1'b0;
      tx        <= '0;
      load_tx   <= 1'b0;
      bus_addr  <= '0;
      bus_wdata <= '0;
      bus_we    <= 1'b0;
      bus_re    <= 1'b0;
    end else begin
      bus_we  <= 1'b0;
      bus_re  <= 1'b0;
      load_tx <= 1'b0;
      if (!sel) begin
        nbits <= '0;
      end else begin
        if (rise && nbits < 6'd40) begin
          rx    <= {rx[38:0], mosi_s[1]};
          nbits <= nbits + 1'b1;
          if (nbits == 6'd7) begin
            rw       <= rx[6];
            bus_addr <= {rx[5:0], mosi_s[1]};
            load_tx  <= ~rx[6];
          end
          if (nbits == 6'd39 && rw) begin
            bus_wdata <= {rx[30:0], mosi_s[1]};
            bus_we    <= 1'b1;
          end
        end
        if (fall && nbits > 6'd8 && nbits < 6'd40) tx <= {tx[30:0], 1'b0};
      end
      if (load_tx) begin
        tx     <= bus_rdata;
        bus_re <= 1'b1;
      end
    end
  end

  assign miso = tx[31];

endmodule
