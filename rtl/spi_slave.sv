// spi_slave: configuration port (SPI mode 0, MSB first).
//
// A frame is 24 bits while cs_n is low: bit 23 = 1 for write / 0 for read,
// bits 22:16 the register address, bits 15:0 the data. On a write the data is
// delivered with wr_en for one clock after the 24th bit. On a read, rd_addr
// is presented once the address is known and the register value is shifted
// out on miso, MSB first, during the 16 data bits. SCK, MOSI and CS are
// oversampled by the core clock through two-flop synchronizers, so SCK must
// be slower than a quarter of the core clock. The frame format is this
// design's choice; the chip only names an SPI port feeding the parameter bank.
module spi_slave (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sck,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        miso,
  output logic        wr_en,
  output logic [6:0]  addr,
  output logic [15:0] wr_data,
  output logic [6:0]  rd_addr,
  input  logic [15:0] rd_data
);
  logic [2:0]  sck_s, cs_s;
  logic [1:0]  mosi_s;
  logic [4:0]  bitc;
  logic [23:0] sh;
  logic [15:0] tx;

  wire sck_rise = sck_s[1] & ~sck_s[2];
  wire sck_fall = ~sck_s[1] & sck_s[2];
  wire cs_act   = ~cs_s[1];

  assign rd_addr = sh[6:0];   // valid after the 8th bit
  assign miso    = tx[15];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_s <= '0; cs_s <= '1; mosi_s <= '0; bitc <= '0; sh <= '0; tx <= '0;
      wr_en <= 1'b0; addr <= '0; wr_data <= '0;
    end else begin
      sck_s  <= {sck_s[1:0], sck};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[0], mosi};
      wr_en  <= 1'b0;
      if (!cs_act) begin
        bitc <= '0;
      end else begin
        if (sck_rise) begin
          sh   <= {sh[22:0], mosi_s[1]};
          bitc <= bitc + 1'b1;
          if (bitc == 5'd23 && sh[22]) begin
            wr_en   <= 1'b1;
            addr    <= sh[21:15];
            wr_data <= {sh[14:0], mosi_s[1]};
          end
        end
        if (sck_fall) begin
          if (bitc == 5'd8) tx <= rd_data;       // first data bit on this edge
          else tx <= {tx[14:0], 1'b0};
        end
      end
    end
  end
endmodule
