// tb_reg_mem_ctrl -- checks the coordinate register and the painter on the
// full 800 x 400 canvas. The picture memory is a shadow array here that
// takes every write. Checked: the start-up clear (every pixel, one per
// clock), draw / erase / bold / red / blue brushes at the pixel the panel
// corner coordinates imply, clipping at the canvas edges, brush duration
// (one clock per pixel), a sample dropped while busy, a clear requested
// during a brush, and the coordinate register.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_reg_mem_ctrl;
  import touch_pkg::*;
  localparam int W = 800, HT = 400;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  touch_t sample = '0, coord;
  logic sample_valid = 0, clear_req = 0, coord_seen, fb_we, busy, drop;
  mode_t mode = '{erase: 0, bold: 0, ink: INK_RED};
  logic [18:0] fb_waddr;
  pix_e fb_wdata;
  pix_e img [W*HT];
  pix_e expv [W*HT];
  int writes = 0, busy_cyc = 0, drops = 0;

  reg_mem_ctrl dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (fb_we) begin img[fb_waddr] <= fb_wdata; writes++; end
    if (busy && rst_n) busy_cyc++;
    if (drop) drops++;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected brush, worked out from the panel corners and the brush size
  function automatic int brush_paint(input logic [11:0] x, y, input mode_t m);
    int c, r, h, n;
    c = (int'(y) * W) / 4096;
    r = ((4095 - int'(x)) * HT) / 4096;
    h = m.bold ? 3 : 1;
    n = 0;
    for (int rr = r - h; rr <= r + h; rr++)
      for (int cc = c - h; cc <= c + h; cc++)
        if (rr >= 0 && rr < HT && cc >= 0 && cc < W) begin
          expv[rr * W + cc] = m.erase ? PIX_BG : (m.ink == INK_BLUE ? PIX_BLUE : PIX_RED);
          n++;
        end
    return n;
  endfunction

  task automatic compare(input string tag);
    int bad = 0;
    for (int i = 0; i < W * HT; i++) if (img[i] != expv[i]) bad++;
    `CHECK(bad == 0, $sformatf("%s: %0d pixels differ", tag, bad))
  endtask

  task automatic touch(input logic [11:0] x, y, input mode_t m, input string tag);
    int n, b0, w0;
    @(negedge clk);
    mode = m; sample = '{x: x, y: y}; sample_valid = 1;
    @(negedge clk) sample_valid = 0;
    `CHECK(coord == '{x: x, y: y} && coord_seen, {tag, ": coordinate register"})
    b0 = busy_cyc; w0 = writes;
    n = brush_paint(x, y, m);
    while (busy) @(negedge clk);
    @(negedge clk);  // last write lands one clock after busy falls
    `CHECK(busy_cyc - b0 == n && writes - w0 == n,
           $sformatf("%s: brush took %0d cycles / %0d writes, expected %0d", tag, busy_cyc - b0, writes - w0, n))
    compare(tag);
  endtask

  initial begin
    int d0;
    for (int i = 0; i < W * HT; i++) begin img[i] = PIX_RED; expv[i] = PIX_BG; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    `CHECK(busy && !coord_seen, "start-up clear begins after reset")
    while (busy) @(negedge clk);
    @(negedge clk);  // last write lands one clock after busy falls
    `CHECK(writes == W * HT && busy_cyc == W * HT, $sformatf("start-up clear: %0d writes in %0d cycles", writes, busy_cyc))
    compare("start-up clear");
    touch(12'h800, 12'h800, '{erase: 0, bold: 0, ink: INK_RED},  "draw red centre");
    touch(12'h810, 12'h808, '{erase: 0, bold: 1, ink: INK_BLUE}, "draw bold blue");
    touch(12'h800, 12'h800, '{erase: 1, bold: 0, ink: INK_BLUE}, "erase");
    touch(12'hFFF, 12'h000, '{erase: 0, bold: 1, ink: INK_RED},  "bold at top-left corner");
    touch(12'h000, 12'hFFF, '{erase: 0, bold: 1, ink: INK_BLUE}, "bold at bottom-right corner");
    touch(12'hFFF, 12'hFFF, '{erase: 0, bold: 0, ink: INK_RED},  "top-right corner");
    touch(12'h000, 12'h000, '{erase: 0, bold: 0, ink: INK_BLUE}, "bottom-left corner");
    touch(12'h810, 12'h808, '{erase: 1, bold: 1, ink: INK_RED},  "erase bold");
    for (int k = 0; k < 20; k++)
      touch(12'($urandom), 12'($urandom),
            '{erase: 1'($urandom), bold: 1'($urandom), ink: ink_e'($urandom_range(1))}, "random stroke");
    // a sample while a brush is being painted is dropped
    @(negedge clk);
    mode = '{erase: 0, bold: 1, ink: INK_RED};
    sample = '{x: 12'h400, y: 12'h400}; sample_valid = 1;
    void'(brush_paint(12'h400, 12'h400, mode));
    @(negedge clk);
    sample = '{x: 12'hC00, y: 12'hC00};
    d0 = drops;
    @(negedge clk) sample_valid = 0;
    @(negedge clk);
    `CHECK(drops == d0 + 1, "sample during a brush is dropped")
    `CHECK(coord == '{x: 12'hC00, y: 12'hC00}, "dropped sample still updates the coordinate register")
    while (busy) @(negedge clk);
    @(negedge clk);  // last write lands one clock after busy falls
    compare("dropped sample not painted");
    // clear requested in the middle of a brush: brush finishes, then clear
    @(negedge clk);
    sample = '{x: 12'h200, y: 12'h300}; sample_valid = 1;
    @(negedge clk) sample_valid = 0;
    repeat (5) @(negedge clk);
    clear_req = 1;
    @(negedge clk) clear_req = 0;
    d0 = writes;
    while (busy) @(negedge clk);
    @(negedge clk);  // last write lands one clock after busy falls
    `CHECK(writes - d0 == 49 - 5 + W * HT, $sformatf("brush rest plus clear: %0d writes", writes - d0))
    for (int i = 0; i < W * HT; i++) expv[i] = PIX_BG;
    compare("clear after brush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
