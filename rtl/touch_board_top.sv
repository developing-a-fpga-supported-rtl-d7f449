// touch_board_top -- main control module of the touchscreen drawing board.
//
// A stand-alone electronic board: the teacher writes on a resistive touch
// panel with a pen, and the strokes appear on the panel's own 800 x 400
// colour LCD and, at the same time, on a VGA monitor or projector, with no
// computer involved. This module connects the blocks inside the FPGA and
// the FPGA pins:
//
//   touch ADC --serial--> adc_spi_ctrl --X/Y--> reg_mem_ctrl --+--> seg7_ctrl --> 6 digits
//                                                  | paint     |
//   buttons --> button_ctrl --mode/clear-----------+           |
//                                                  v
//                                            frame_ram --port A--> glcd_ctrl --> LCD
//                                                      --port B--> vga_ctrl  --> VGA DAC
//
// delay_ctrl holds everything except itself and the 7-segment block in
// reset for DELAY_CYCLES after the reset button is released. The block
// set, their names and the data flow follow the paper's system diagram:
// ADC serial control, "SDRAM or register" control (register variant),
// GLCD control with its serial and timing sub-modules, VGA control,
// 7-segment control, delay control and this main module. The picture
// memory, the button decoding and all protocols and timings are this
// design's own reading of that diagram.
//
// Clock: one clock, `clk`, at 40 MHz for the default VGA timing (800x600 at
// 60 Hz); it is also the LCD pixel clock. Reset: rst_n, the reset button,
// active low, asynchronous.
module touch_board_top
  import touch_pkg::*;
#(
  parameter int unsigned DELAY_CYCLES = 1_000_000,
  parameter int unsigned ADC_SPI_HALF = 16,
  parameter int unsigned SAMPLE_GAP   = 40_000,
  parameter int unsigned DEB_CYCLES   = 400_000,
  parameter int unsigned LCD_SPI_HALF = 16,
  parameter int unsigned NORMAL_SIZE  = 3,
  parameter int unsigned BOLD_SIZE    = 7
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [4:0] key_n,
  // touch ADC on the LCD touch module
  input  logic       adc_penirq_n,
  input  logic       adc_dout,
  output logic       adc_din,
  output logic       adc_dclk,
  output logic       adc_cs_n,
  // LCD serial configuration port
  output logic       lcd_scen,
  output logic       lcd_sclk,
  output logic       lcd_sda,
  // LCD video
  output logic       ltm_nclk,
  output logic       ltm_hd,
  output logic       ltm_vd,
  output logic       ltm_den,
  output logic [7:0] ltm_r,
  output logic [7:0] ltm_g,
  output logic [7:0] ltm_b,
  // VGA DAC
  output logic       vga_clk,
  output logic       vga_hs,
  output logic       vga_vs,
  output logic       vga_blank_n,
  output logic       vga_sync_n,
  output logic [9:0] vga_r,
  output logic [9:0] vga_g,
  output logic [9:0] vga_b,
  // 7-segment displays, segments a..g on bits 0..6, active low
  output logic [6:0] hex [6]
);

  localparam int unsigned AW = $clog2(CANVAS_W * CANVAS_H);

  logic          ready, run_n;
  touch_t        sample, coord;
  logic          sample_valid, pen_down, coord_seen;
  mode_t         mode;
  logic          clear_req;
  logic          fb_we;
  logic [AW-1:0] fb_waddr, raddr_lcd, raddr_vga;
  pix_e          fb_wdata, rdata_lcd, rdata_vga;
  logic          mem_busy, mem_drop, lcd_ready, lcd_frame, vga_frame;

  delay_ctrl #(.DELAY_CYCLES(DELAY_CYCLES)) u_delay (.clk, .rst_n, .ready);

  assign run_n = rst_n & ready;

  button_ctrl #(.DEB_CYCLES(DEB_CYCLES)) u_buttons (
    .clk, .rst_n(run_n), .key_n, .mode, .clear_req
  );

  adc_spi_ctrl #(.SPI_HALF(ADC_SPI_HALF), .SAMPLE_GAP(SAMPLE_GAP)) u_adc (
    .clk, .rst_n(run_n),
    .adc_penirq_n, .adc_dout, .adc_din, .adc_dclk, .adc_cs_n,
    .pen_down, .sample, .sample_valid
  );

  reg_mem_ctrl #(.NORMAL_SIZE(NORMAL_SIZE), .BOLD_SIZE(BOLD_SIZE), .AW(AW)) u_mem (
    .clk, .rst_n(run_n),
    .sample, .sample_valid, .mode, .clear_req,
    .coord, .coord_seen,
    .fb_we, .fb_waddr, .fb_wdata,
    .busy(mem_busy), .drop(mem_drop)
  );

  frame_ram #(.AW(AW)) u_fb (
    .clk,
    .we(fb_we), .waddr(fb_waddr), .wdata(fb_wdata),
    .raddr_a(raddr_lcd), .rdata_a(rdata_lcd),
    .raddr_b(raddr_vga), .rdata_b(rdata_vga)
  );

  glcd_ctrl #(.SPI_HALF(LCD_SPI_HALF), .AW(AW)) u_glcd (
    .clk, .rst_n(run_n),
    .fb_raddr(raddr_lcd), .fb_rdata(rdata_lcd),
    .lcd_scen, .lcd_sclk, .lcd_sda,
    .ltm_nclk, .ltm_hd, .ltm_vd, .ltm_den, .ltm_r, .ltm_g, .ltm_b,
    .lcd_ready, .frame_start(lcd_frame)
  );

  vga_ctrl #(.AW(AW)) u_vga (
    .clk, .rst_n(run_n),
    .fb_raddr(raddr_vga), .fb_rdata(rdata_vga),
    .vga_clk, .vga_hs, .vga_vs, .vga_blank_n, .vga_sync_n,
    .vga_r, .vga_g, .vga_b, .frame_start(vga_frame)
  );

  seg7_ctrl u_seg (.clk, .rst_n, .coord, .coord_seen, .hex);

endmodule
