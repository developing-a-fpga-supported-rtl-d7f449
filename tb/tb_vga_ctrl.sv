// tb_vga_ctrl -- checks the VGA output for two full 800x600 frames: line
// and frame periods, sync pulse widths, 800 x 600 unblanked pixels per
// frame, the canvas shown 1:1 in rows 100..499 with the 10-bit colour of
// the picture-memory word at (row-100)*800+col, and black elsewhere. The
// memory is modelled here with a registered read of a fixed pattern.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_vga_ctrl;
  import touch_pkg::*;
  localparam int H_TOT = 800 + 40 + 128 + 88;
  localparam int V_TOT = 600 + 1 + 4 + 23;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [18:0] fb_raddr;
  pix_e fb_rdata;
  logic vga_clk, vga_hs, vga_vs, vga_blank_n, vga_sync_n, frame_start;
  logic [9:0] vga_r, vga_g, vga_b;

  vga_ctrl dut (.*);

  function automatic pix_e pattern(input int a);
    case ((a ^ (a >> 5)) % 3)
      0: return PIX_BG;
      1: return PIX_RED;
      default: return PIX_BLUE;
    endcase
  endfunction
  function automatic logic [29:0] colour10(input pix_e p);
    return (p == PIX_RED) ? {10'h3FF, 10'h0, 10'h0} :
           (p == PIX_BLUE) ? {10'h0, 10'h0, 10'h3FF} : {10'h3FF, 10'h3FF, 10'h3FF};
  endfunction

  always_ff @(posedge clk) fb_rdata <= pattern(int'(fb_raddr));
  always #5 clk = ~clk;

  initial begin
    repeat (3 * H_TOT * V_TOT + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cyc = 0, t_hs = -1, t_vs = -1, t_hs_rise = -1, t_vs_rise = -1;
  int col = 0, row = 0, vis = 0, bad_px = 0, canvas_px = 0, frames = 0, bad_lines = 0;
  logic hs_q = 0, vs_q = 0, bl_q = 0;
  logic [29:0] exp_c;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    #1;
    if (vga_blank_n) begin
      if (row >= 100 && row < 500) begin
        exp_c = colour10(pattern((row - 100) * 800 + col));
        canvas_px++;
      end else exp_c = '0;
      if ({vga_r, vga_g, vga_b} != exp_c) begin
        if (bad_px < 5) $display("pixel (%0d,%0d) wrong: %h", col, row, {vga_r, vga_g, vga_b});
        bad_px++;
      end
      col++;
      vis++;
    end else if (vga_r != 0 || vga_g != 0 || vga_b != 0) bad_px++;
    if (bl_q && !vga_blank_n) begin row++; col = 0; end
    if (!hs_q && vga_hs) begin
      if (t_hs >= 0 && cyc - t_hs != H_TOT) bad_lines++;
      t_hs = cyc; t_hs_rise = cyc;
    end
    if (hs_q && !vga_hs && cyc - t_hs_rise != 128) bad_lines++;
    if (!vs_q && vga_vs) begin
      frames++;
      `CHECK(row == 600, $sformatf("%0d visible lines in frame", row))
      `CHECK(vis == 800 * 600, $sformatf("%0d visible pixels in frame", vis))
      `CHECK(canvas_px == 800 * 400, $sformatf("%0d canvas pixels in frame", canvas_px))
      `CHECK(bad_px == 0, $sformatf("%0d pixels with wrong colour", bad_px))
      `CHECK(bad_lines == 0, $sformatf("%0d lines with wrong hsync period or width", bad_lines))
      if (t_vs >= 0) `CHECK(cyc - t_vs == H_TOT * V_TOT, $sformatf("frame period %0d", cyc - t_vs))
      t_vs = cyc; t_vs_rise = cyc;
      row = 0; col = 0; vis = 0; bad_px = 0; canvas_px = 0; bad_lines = 0;
    end
    if (vs_q && !vga_vs) `CHECK(cyc - t_vs_rise == 4 * H_TOT, $sformatf("vsync width %0d", cyc - t_vs_rise))
    hs_q = vga_hs; vs_q = vga_vs; bl_q = vga_blank_n;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    #1 `CHECK(vga_sync_n == 1'b0 && vga_clk == clk, "DAC sync and clock pins")
    wait (frames == 3);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
