// tb_glcd_ctrl -- checks the LCD control wrapper: two configuration words
// go out on the serial port first, no video (data enable, sync) is sent
// before the configuration is done, the first enabled pixel follows three
// clocks after lcd_ready, and one full frame of 800 x 400 enabled pixels
// carries the colours read from the picture memory (modelled here).
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_glcd_ctrl;
  import touch_pkg::*;
  localparam int unsigned H = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [18:0] fb_raddr;
  pix_e fb_rdata;
  logic lcd_scen, lcd_sclk, lcd_sda, ltm_nclk, ltm_hd, ltm_vd, ltm_den, lcd_ready, frame_start;
  logic [7:0] ltm_r, ltm_g, ltm_b;
  int frames_cfg = 0, video_early = 0, den_cnt = 0, bad_px = 0;
  longint cyc = 0, t_ready = -1, t_den = -1;

  glcd_ctrl #(.SPI_HALF(H)) dut (.*);

  function automatic pix_e pattern(input int a);
    return (a % 3 == 0) ? PIX_RED : (a % 3 == 1) ? PIX_BG : PIX_BLUE;
  endfunction
  function automatic logic [23:0] colour(input pix_e p);
    return (p == PIX_RED) ? 24'hFF0000 : (p == PIX_BLUE) ? 24'h0000FF : 24'hFFFFFF;
  endfunction

  always_ff @(posedge clk) fb_rdata <= pattern(int'(fb_raddr));
  always #5 clk = ~clk;
  always @(posedge lcd_scen) if (rst_n) frames_cfg++;

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    #1;
    if (!lcd_ready && (ltm_den || !ltm_hd || !ltm_vd)) video_early++;
    if (lcd_ready && t_ready < 0) t_ready = cyc;
    if (ltm_den) begin
      if (t_den < 0) t_den = cyc;
      if (den_cnt < 800 * 400 && {ltm_r, ltm_g, ltm_b} != colour(pattern(den_cnt))) bad_px++;
      den_cnt++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (den_cnt == 800 * 400);
    repeat (10) @(posedge clk);
    `CHECK(frames_cfg == 2, $sformatf("%0d configuration frames", frames_cfg))
    `CHECK(video_early == 0, "video before the configuration was written")
    `CHECK(t_ready == 2 * 34 * H, $sformatf("lcd_ready after %0d cycles", t_ready))
    `CHECK(t_den - t_ready == 3, $sformatf("first pixel %0d cycles after lcd_ready", t_den - t_ready))
    `CHECK(bad_px == 0, $sformatf("%0d wrong pixels in the first frame", bad_px))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
