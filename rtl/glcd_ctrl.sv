// glcd_ctrl -- graphic LCD control: configuration port plus video stream.
//
// Made of the two sub-modules the paper names: glcd_spi, which writes the
// LCD driver's configuration words over the serial port, and glcd_timing,
// which sends the sync signals and 24-bit RGB data read from the picture
// memory. The video stream is held in reset until the configuration has
// been written (`lcd_ready`), so the panel only receives pixels once it is
// set up; that ordering is this design's choice.
//
// Timing: lcd_ready rises N_WORDS*34*SPI_HALF clocks after reset; the
// first frame starts on the clock after that; then see glcd_timing.
module glcd_ctrl
  import touch_pkg::*;
#(
  parameter int unsigned SPI_HALF = 16,
  parameter int unsigned N_WORDS  = 2,
  parameter logic [15:0] INIT_WORDS [N_WORDS] = '{16'h0000, 16'h0000},
  parameter int unsigned CLK_DIV  = 1,
  parameter int unsigned H_FP     = 40,
  parameter int unsigned H_SYNC   = 1,
  parameter int unsigned H_BP     = 215,
  parameter int unsigned V_FP     = 10,
  parameter int unsigned V_SYNC   = 1,
  parameter int unsigned V_BP     = 34,
  parameter int unsigned AW       = $clog2(CANVAS_W * CANVAS_H)
) (
  input  logic          clk,
  input  logic          rst_n,
  // picture memory read port
  output logic [AW-1:0] fb_raddr,
  input  pix_e          fb_rdata,
  // LCD serial configuration port
  output logic          lcd_scen,
  output logic          lcd_sclk,
  output logic          lcd_sda,
  // LCD video pins
  output logic          ltm_nclk,
  output logic          ltm_hd,
  output logic          ltm_vd,
  output logic          ltm_den,
  output logic [7:0]    ltm_r,
  output logic [7:0]    ltm_g,
  output logic [7:0]    ltm_b,
  output logic          lcd_ready,
  output logic          frame_start
);

  logic video_rst_n;

  glcd_spi #(
    .SPI_HALF(SPI_HALF), .N_WORDS(N_WORDS), .INIT_WORDS(INIT_WORDS)
  ) u_spi (
    .clk, .rst_n, .lcd_scen, .lcd_sclk, .lcd_sda, .done(lcd_ready)
  );

  assign video_rst_n = rst_n & lcd_ready;

  glcd_timing #(
    .CLK_DIV(CLK_DIV), .H_FP(H_FP), .H_SYNC(H_SYNC), .H_BP(H_BP),
    .V_FP(V_FP), .V_SYNC(V_SYNC), .V_BP(V_BP), .AW(AW)
  ) u_tim (
    .clk, .rst_n(video_rst_n), .fb_raddr, .fb_rdata,
    .ltm_nclk, .ltm_hd, .ltm_vd, .ltm_den, .ltm_r, .ltm_g, .ltm_b, .frame_start
  );

endmodule
