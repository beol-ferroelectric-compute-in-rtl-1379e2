// spi_scan: SPI slave and scan chain for cell-level test access.
//
// The test chip reaches its word lines and source/drain lines through a
// scan chain loaded over SPI, so that single cells or arbitrary sets of
// lines can be selected from outside. The paper states only that; the
// frame format, SPI mode and chain order below are this design's choices.
//
// SPI mode 0: spi_cs_n low frames a transfer, spi_mosi is sampled on rising
// spi_sck, spi_miso is updated when spi_cs_n falls and on every falling
// spi_sck with the bit at the far end of the chain, so a frame reads back
// the previous content, last position first. The SPI pins are synchronised into clk (two flops) and their
// edges detected, so clk must run at least four times faster than spi_sck.
// The chain is CHAIN = 4 + ROWS + COLS bits long; the first bit shifted in
// ends up in the last position. When spi_cs_n rises the chain is copied to
// the update latch, whose fields drive the macro while test_en is set:
//   bit  CHAIN-1         test_en   (hand the array to the scan chain)
//   bits CHAIN-2:CHAIN-4 mux_sel   (column slot read by the ADCs)
//   bits ROWS+COLS-1:COLS wl_sel   (word lines at read bias, bit r = row r)
//   bits COLS-1:0        bl_sel    (bit lines at read bias, bit c = column c)
// so a frame is sent as test_en, mux_sel (MSB first), wl_sel (row ROWS-1
// first), bl_sel (column COLS-1 first).
module spi_scan #(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 spi_sck,
  input  logic                 spi_cs_n,
  input  logic                 spi_mosi,
  output logic                 spi_miso,
  output logic                 test_en,
  output logic [2:0]           mux_sel,
  output logic [ROWS-1:0]      wl_sel,
  output logic [COLS-1:0]      bl_sel
);

  localparam int unsigned CHAIN = 4 + ROWS + COLS;

  logic [2:0]       sck_s, cs_s;
  logic [1:0]       mosi_s;
  logic [CHAIN-1:0] chain, latch_q;
  logic             sck_rise, sck_fall, cs_rise, cs_fall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_s  <= '0;
      cs_s   <= '1;
      mosi_s <= '0;
    end else begin
      sck_s  <= {sck_s[1:0], spi_sck};
      cs_s   <= {cs_s[1:0], spi_cs_n};
      mosi_s <= {mosi_s[0], spi_mosi};
    end
  end

  assign sck_rise = !cs_s[1] && sck_s[1] && !sck_s[2];
  assign sck_fall = !cs_s[1] && !sck_s[1] && sck_s[2];
  assign cs_rise  = cs_s[1] && !cs_s[2];
  assign cs_fall  = !cs_s[1] && cs_s[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chain    <= '0;
      latch_q  <= '0;
      spi_miso <= 1'b0;
    end else begin
      if (sck_rise) chain <= {chain[CHAIN-2:0], mosi_s[1]};
      if (sck_fall || cs_fall) spi_miso <= chain[CHAIN-1];
      if (cs_rise)  latch_q <= chain;
    end
  end

  assign test_en = latch_q[CHAIN-1];
  assign mux_sel = latch_q[CHAIN-2 -: 3];
  assign wl_sel  = latch_q[COLS +: ROWS];
  assign bl_sel  = latch_q[COLS-1:0];

endmodule
