// tb_seg7_ctrl -- checks the coordinate display: dark until the first
// touch, then X as three hex digits on hex[5..3] and Y on hex[2..0],
// segments a..g on bits 0..6, active low, one clock after the input.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_seg7_ctrl;
  import touch_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, coord_seen = 0;
  touch_t coord = '0;
  logic [6:0] hex [6];
  // lit-segment patterns {g..a} of the hex digits 0..F
  localparam logic [6:0] LIT [16] = '{7'h3F, 7'h06, 7'h5B, 7'h4F, 7'h66, 7'h6D, 7'h7D, 7'h07,
                                      7'h7F, 7'h6F, 7'h77, 7'h7C, 7'h39, 7'h5E, 7'h79, 7'h71};

  seg7_ctrl dut (.clk, .rst_n, .coord, .coord_seen, .hex);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [11:0] x, y;
    logic [3:0]  d;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    coord = '{x: 12'hABC, y: 12'h123};
    @(posedge clk); #1;
    for (int i = 0; i < 6; i++) `CHECK(hex[i] == 7'h7F, "dark before first touch")
    for (int n = 0; n < 200; n++) begin
      x = (n == 0) ? 12'h0F5 : 12'($urandom);
      y = (n == 1) ? 12'hFFF : 12'($urandom);
      @(negedge clk);
      coord = '{x: x, y: y};
      coord_seen = 1;
      @(posedge clk); #1;
      for (int i = 0; i < 6; i++) begin
        d = (i >= 3) ? 4'(x >> (4 * (i - 3))) : 4'(y >> (4 * i));
        `CHECK(hex[i] == ~LIT[d], $sformatf("digit %0d of x=%h y=%h: %b", i, x, y, hex[i]))
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
