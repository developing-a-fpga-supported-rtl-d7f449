// tb_touch_board_top -- end-to-end test of the drawing board with every
// parameter at its default (40 MHz clock, 25 ms start-up delay, 1 ms touch
// sampling, 10 ms button debounce, full 800 x 400 canvas).
//
// A behavioural touch ADC (adc_model) stands for the panel. The test
// touches the panel, presses the control buttons and checks, against a
// picture worked out here from the panel geometry and brush sizes, every
// canvas pixel of a complete VGA frame (800x600, canvas in rows 100..499)
// and of a complete LCD frame, plus the 7-segment digits. Sequence:
//   1. reset; pen held down from the start: samples taken while the
//      start-up clear is still running are dropped, later ones drawn
//      (red, normal brush);
//   2. ink -> blue, bold on, draw a second point;
//   3. erase mode, touch the first point (bold eraser);
//   4. clear screen.
// Each mechanism (start-up delay, LCD configuration before video, dropped
// sample, draw, bold, blue, erase, clear) is counted and must occur.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_touch_board_top;
  import touch_pkg::*;
  localparam int W = 800, HT = 400;
  localparam int DEB = 400_000;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic [4:0] key_n = '1;
  logic touch = 0;
  logic [11:0] x_val = '0, y_val = '0;
  logic adc_penirq_n, adc_dout, adc_din, adc_dclk, adc_cs_n;
  logic lcd_scen, lcd_sclk, lcd_sda;
  logic ltm_nclk, ltm_hd, ltm_vd, ltm_den;
  logic [7:0] ltm_r, ltm_g, ltm_b;
  logic vga_clk, vga_hs, vga_vs, vga_blank_n, vga_sync_n;
  logic [9:0] vga_r, vga_g, vga_b;
  logic [6:0] hex [6];
  int adc_frames, bad_cmds;

  touch_board_top dut (.*);
  adc_model adc (.touch, .x_val, .y_val, .adc_cs_n, .adc_dclk, .adc_din,
                 .adc_dout, .adc_penirq_n, .frames(adc_frames), .bad_cmds);

  always #12.5 clk = ~clk;   // 40 MHz

  // ---------------------------------------------------------------- model
  pix_e expv [W*HT];
  mode_t tb_mode = '{erase: 0, bold: 0, ink: INK_RED};

  function automatic void paint(input logic [11:0] x, y, input mode_t m);
    int c, r, h;
    c = (int'(y) * W) / 4096;
    r = ((4095 - int'(x)) * HT) / 4096;
    h = m.bold ? 3 : 1;
    for (int rr = r - h; rr <= r + h; rr++)
      for (int cc = c - h; cc <= c + h; cc++)
        if (rr >= 0 && rr < HT && cc >= 0 && cc < W)
          expv[rr * W + cc] = m.erase ? PIX_BG : (m.ink == INK_BLUE ? PIX_BLUE : PIX_RED);
  endfunction

  function automatic logic [23:0] rgb24(input pix_e p);
    return (p == PIX_RED) ? 24'hFF0000 : (p == PIX_BLUE) ? 24'h0000FF : 24'hFFFFFF;
  endfunction

  // ----------------------------------------------------- mechanism counters
  longint cyc = 0, t_ready = -1, t_lcd_ready = -1, t_first_den = -1;
  int n_samples = 0, n_drops = 0, n_paint = 0, n_bold = 0, n_blue = 0, n_erase = 0, n_clear = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.ready && t_ready < 0) t_ready = cyc;
    if (dut.lcd_ready && t_lcd_ready < 0) t_lcd_ready = cyc;
    if (ltm_den && t_first_den < 0) t_first_den = cyc;
    if (dut.sample_valid) n_samples++;
    if (dut.mem_drop) n_drops++;
    if (dut.u_mem.state == 2'd1 && $past(dut.u_mem.state) == 2'd0) begin
      n_paint++;
      if (dut.mode.bold) n_bold++;
      if (dut.mode.erase) n_erase++;
      else if (dut.mode.ink == INK_BLUE) n_blue++;
    end
    if (dut.clear_req) n_clear++;
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------ frame checkers
  task automatic check_vga_frame(input string tag);
    int row = 0, col = 0, bad = 0, vis = 0;
    logic bl_q = 0;
    logic [29:0] e;
    @(posedge vga_vs);
    @(negedge vga_vs);
    // from the end of vsync to the next vsync: one whole frame
    while (!vga_vs) begin
      @(posedge clk); #1;
      if (vga_blank_n) begin
        if (row >= 100 && row < 500) begin
          logic [23:0] c;
          c = rgb24(expv[(row - 100) * W + col]);
          e = {c[23:16], c[23:22], c[15:8], c[15:14], c[7:0], c[7:6]};
        end else e = '0;
        if ({vga_r, vga_g, vga_b} != e) bad++;
        col++; vis++;
      end
      if (bl_q && !vga_blank_n) begin row++; col = 0; end
      bl_q = vga_blank_n;
    end
    `CHECK(vis == 800 * 600 && bad == 0, $sformatf("%s: VGA frame, %0d visible, %0d wrong", tag, vis, bad))
  endtask

  task automatic check_lcd_frame(input string tag);
    int row = 0, col = 0, bad = 0, n = 0;
    logic den_q = 0;
    @(negedge ltm_vd);
    @(posedge ltm_vd);
    while (ltm_vd) begin
      @(posedge clk); #1;
      if (ltm_den) begin
        if ({ltm_r, ltm_g, ltm_b} != rgb24(expv[row * W + col])) bad++;
        col++; n++;
      end
      if (den_q && !ltm_den) begin row++; col = 0; end
      den_q = ltm_den;
    end
    `CHECK(n == W * HT && bad == 0, $sformatf("%s: LCD frame, %0d pixels, %0d wrong", tag, n, bad))
  endtask

  task automatic check_frames(input string tag);
    fork
      check_vga_frame(tag);
      check_lcd_frame(tag);
    join
  endtask

  task automatic press(input int k);
    @(negedge clk) key_n[k] = 1'b0;
    repeat (3 * DEB) @(posedge clk);
    @(negedge clk) key_n[k] = 1'b1;
    repeat (3 * DEB) @(posedge clk);
  endtask

  task automatic stroke(input logic [11:0] x, y, input int cycles);
    @(negedge clk);
    x_val = x; y_val = y; touch = 1;
    repeat (cycles) @(posedge clk);
    @(negedge clk) touch = 0;
    repeat (100_000) @(posedge clk);
    paint(x, y, tb_mode);
  endtask

  task automatic check_hex(input logic [11:0] x, y);
    localparam logic [6:0] LIT [16] = '{7'h3F, 7'h06, 7'h5B, 7'h4F, 7'h66, 7'h6D, 7'h7D, 7'h07,
                                        7'h7F, 7'h6F, 7'h77, 7'h7C, 7'h39, 7'h5E, 7'h79, 7'h71};
    logic [23:0] v;
    int bad = 0;
    v = {x, y};
    for (int i = 0; i < 6; i++) if (hex[i] != ~LIT[v[4*i +: 4]]) bad++;
    `CHECK(bad == 0, $sformatf("7-segment shows x=%h y=%h: %0d digits wrong", x, y, bad))
  endtask

  // ------------------------------------------------------------- sequence
  initial begin
    for (int i = 0; i < W * HT; i++) expv[i] = PIX_BG;
    repeat (10) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // 1. pen down from the start, held until well after the start-up clear
    tb_mode = '{erase: 0, bold: 0, ink: INK_RED};
    stroke(12'h900, 12'h300, 1_000_000 + 320_000 + 200_000);
    `CHECK(t_ready == 1_000_000 + 10 + 1, $sformatf("start-up delay ended at cycle %0d", t_ready))
    `CHECK(t_lcd_ready > t_ready && t_first_den > t_lcd_ready, "LCD configured before video starts")
    `CHECK(n_drops > 0 && n_samples > n_drops, $sformatf("%0d samples, %0d dropped during start-up clear", n_samples, n_drops))
    check_hex(12'h900, 12'h300);
    check_frames("red dot");
    // 2. blue, bold
    press(3);
    press(2);
    tb_mode = '{erase: 0, bold: 1, ink: INK_BLUE};
    stroke(12'h400, 12'hC00, 200_000);
    check_hex(12'h400, 12'hC00);
    check_frames("blue bold dot");
    // 3. bold eraser over the red dot
    press(1);
    tb_mode = '{erase: 1, bold: 1, ink: INK_BLUE};
    stroke(12'h900, 12'h300, 200_000);
    check_frames("red dot erased");
    // 4. clear screen
    press(4);
    for (int i = 0; i < W * HT; i++) expv[i] = PIX_BG;
    check_frames("cleared");
    `CHECK(bad_cmds == 0, "ADC command bytes")
    $display("mechanisms: samples=%0d dropped=%0d brushes=%0d bold=%0d blue=%0d erase=%0d clear=%0d",
             n_samples, n_drops, n_paint, n_bold, n_blue, n_erase, n_clear);
    `CHECK(n_paint > 0, "draw happened")
    `CHECK(n_bold > 0, "bold brush happened")
    `CHECK(n_blue > 0, "blue ink happened")
    `CHECK(n_erase > 0, "erase happened")
    `CHECK(n_clear == 1, "clear happened once")
    `CHECK(n_drops > 0, "dropped sample happened")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
