// spi_scan_tb: sends random SPI frames (mode 0, SPI clock 8x slower than
// clk) into the scan chain and checks that the update latch fields hold the
// frame only after spi_cs_n rises, and that each frame reads back the
// previous one on MISO.
module spi_scan_tb;
  localparam int ROWS = 32, COLS = 256, CHAIN = 4 + ROWS + COLS;
  logic clk = 0, rst_n = 0, spi_sck = 0, spi_cs_n = 1, spi_mosi = 0;
  logic spi_miso, test_en;
  logic [2:0] mux_sel;
  logic [ROWS-1:0] wl_sel;
  logic [COLS-1:0] bl_sel;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  spi_scan #(.ROWS(ROWS), .COLS(COLS)) dut (.clk(clk), .rst_n(rst_n), .spi_sck(spi_sck), .spi_cs_n(spi_cs_n),
    .spi_mosi(spi_mosi), .spi_miso(spi_miso), .test_en(test_en), .mux_sel(mux_sel), .wl_sel(wl_sel), .bl_sel(bl_sel));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [CHAIN-1:0] fr, prev, rd, old_q;
    repeat (3) @(posedge clk);
    rst_n = 1;
    prev = '0;
    for (int t = 0; t < 12; t++) begin
      for (int w = 0; w < CHAIN; w += 32) fr[w +: 32] = $urandom;
      old_q = {test_en, mux_sel, wl_sel, bl_sel};
      spi_cs_n = 0;
      repeat (8) @(posedge clk);
      for (int b = CHAIN - 1; b >= 0; b--) begin
        spi_mosi = fr[b];
        repeat (4) @(posedge clk);
        spi_sck = 1; rd[b] = spi_miso;
        repeat (4) @(posedge clk);
        spi_sck = 0;
      end
      repeat (4) @(posedge clk); #1;
      checks++;
      if ({test_en, mux_sel, wl_sel, bl_sel} != old_q) failures++;
      spi_cs_n = 1;
      repeat (8) @(posedge clk); #1;
      checks += 5;
      if (test_en != fr[CHAIN-1]) failures++;
      if (mux_sel != fr[CHAIN-2 -: 3]) failures++;
      if (wl_sel != fr[COLS +: ROWS]) failures++;
      if (bl_sel != fr[COLS-1:0]) failures++;
      if (rd != prev) failures++;
      prev = fr;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
