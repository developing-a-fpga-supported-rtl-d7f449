// tb_glcd_timing -- checks the LCD video stream for two full frames:
// line and frame periods, sync pulse widths, front porch, 800 x 400
// data-enable cycles per frame, and that each enabled pixel carries the
// 24-bit colour of the picture-memory word at row*800+col. The memory is
// modelled here with a registered read of a fixed pattern.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_glcd_timing;
  import touch_pkg::*;
  localparam int H_TOT = 800 + 40 + 1 + 215;
  localparam int V_TOT = 400 + 10 + 1 + 34;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [18:0] fb_raddr;
  pix_e fb_rdata;
  logic ltm_nclk, ltm_hd, ltm_vd, ltm_den, frame_start;
  logic [7:0] ltm_r, ltm_g, ltm_b;

  glcd_timing dut (.*);

  function automatic pix_e pattern(input int a);
    case ((a ^ (a >> 7)) % 3)
      0: return PIX_BG;
      1: return PIX_RED;
      default: return PIX_BLUE;
    endcase
  endfunction
  function automatic logic [23:0] colour(input pix_e p);
    return (p == PIX_RED) ? 24'hFF0000 : (p == PIX_BLUE) ? 24'h0000FF : 24'hFFFFFF;
  endfunction

  always_ff @(posedge clk) fb_rdata <= pattern(int'(fb_raddr));
  always #5 clk = ~clk;

  initial begin
    repeat (3 * H_TOT * V_TOT) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cyc = 0, t_hd = -1, t_vd = -1, t_den_end = -1, t_hd_fall = -1;
  int col = 0, row = 0, den_cnt = 0, bad_px = 0, frames = 0, lines = 0;
  logic hd_q = 1, vd_q = 1, den_q = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    #1;
    if (ltm_den) begin
      if (row < 400 && col < 800) begin
        if ({ltm_r, ltm_g, ltm_b} != colour(pattern(row * 800 + col))) begin
          if (bad_px < 5) $display("pixel (%0d,%0d) wrong: %h", col, row, {ltm_r, ltm_g, ltm_b});
          bad_px++;
        end
      end else bad_px++;
      col++;
      den_cnt++;
    end else if (ltm_r != 0 || ltm_g != 0 || ltm_b != 0) bad_px++;
    if (den_q && !ltm_den) begin
      row++; col = 0; t_den_end = cyc;
    end
    if (hd_q && !ltm_hd) begin
      if (t_hd >= 0) begin
        lines++;
        if (lines < 3) `CHECK(cyc - t_hd == H_TOT, $sformatf("line period %0d", cyc - t_hd))
        else if (cyc - t_hd != H_TOT) begin checks++; failures++; $display("FAIL line period %0d", cyc - t_hd); end
      end
      if (t_den_end >= 0 && row == 1 && lines < 3)
        `CHECK(cyc - t_den_end == 40, $sformatf("front porch %0d", cyc - t_den_end))
      t_hd = cyc; t_hd_fall = cyc;
    end
    if (!hd_q && ltm_hd && lines < 3)
      `CHECK(cyc - t_hd_fall == 1, $sformatf("hsync width %0d", cyc - t_hd_fall))
    if (vd_q && !ltm_vd) begin
      frames++;
      `CHECK(row == 400, $sformatf("%0d enabled lines in frame", row))
      `CHECK(den_cnt == 800 * 400, $sformatf("%0d enabled pixels in frame", den_cnt))
      `CHECK(bad_px == 0, $sformatf("%0d pixels with wrong colour", bad_px))
      if (t_vd >= 0) `CHECK(cyc - t_vd == H_TOT * V_TOT, $sformatf("frame period %0d", cyc - t_vd))
      t_vd = cyc; row = 0; col = 0; den_cnt = 0; bad_px = 0;
    end
    hd_q = ltm_hd; vd_q = ltm_vd; den_q = ltm_den;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (frames == 3);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
