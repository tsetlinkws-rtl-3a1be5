// spi_slave: write-only SPI receiver for configuration and model loading.
//
// The paper gives the pins (SCK, CS, MOSI; there is no MISO) and the use;
// the protocol is this design's: SPI mode 0 (MOSI sampled on rising SCK),
// CS active low, MSB first, 48-bit frames {target[7:0], addr[15:0],
// data[23:0]}. Several frames may follow each other under one CS; raising
// CS drops a partial frame. The pins are synchronised into the system clock
// with two flip-flops, so SCK must be at most a quarter of the system clock.
// Each complete frame gives a one-clock wr_en pulse.
module spi_slave (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sck,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        wr_en,
  output logic [7:0]  wr_tgt,
  output logic [15:0] wr_addr,
  output logic [23:0] wr_data
);
  logic [2:0]  sck_s, cs_s, mosi_s;
  logic [47:0] shreg;
  logic [5:0]  nbits;
  logic        rise;

  assign rise = sck_s[1] && !sck_s[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_s <= '0; cs_s <= '1; mosi_s <= '0; shreg <= '0; nbits <= '0;
      wr_en <= 1'b0; wr_tgt <= '0; wr_addr <= '0; wr_data <= '0;
    end else begin
      sck_s  <= {sck_s[1:0], sck};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[1:0], mosi};
      wr_en  <= 1'b0;
      if (cs_s[1]) begin
        nbits <= '0;
      end else if (rise) begin
        shreg <= {shreg[46:0], mosi_s[1]};
        if (nbits == 6'd47) begin
          nbits   <= '0;
          wr_en   <= 1'b1;
          {wr_tgt, wr_addr, wr_data} <= {shreg[46:0], mosi_s[1]};
        end else begin
          nbits <= nbits + 6'd1;
        end
      end
    end
  end
endmodule
