// tb_glcd_spi -- checks the LCD configuration writer: every configured
// word arrives MSB first in its own chip-enable frame, taken on the rising
// serial clock edge; the serial clock idles low outside frames; `done`
// rises N_WORDS*34*SPI_HALF clocks after reset and nothing is sent after.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_glcd_spi;
  localparam int unsigned H = 3;
  localparam int unsigned N = 4;
  localparam logic [15:0] WORDS [N] = '{16'hA5C3, 16'h0F01, 16'h8000, 16'h1234};
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic lcd_scen, lcd_sclk, lcd_sda, done;
  logic [15:0] got [$];
  logic [15:0] sh;
  int nbits = 0;
  longint cyc = 0, t_done = -1;

  glcd_spi #(.SPI_HALF(H), .N_WORDS(N), .INIT_WORDS(WORDS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    #1 if (done && t_done < 0) t_done = cyc;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver: the LCD driver side
  always @(negedge lcd_scen) begin sh = '0; nbits = 0; end
  always @(posedge lcd_sclk) if (!lcd_scen) begin sh = {sh[14:0], lcd_sda}; nbits++; end
  always @(posedge lcd_scen) if (rst_n) begin
    `CHECK(nbits == 16, $sformatf("frame with %0d bits", nbits))
    got.push_back(sh);
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (done);
    repeat (500) @(posedge clk);
    `CHECK(got.size() == N, $sformatf("%0d words sent, expected %0d", got.size(), N))
    for (int i = 0; i < N && i < got.size(); i++)
      `CHECK(got[i] == WORDS[i], $sformatf("word %0d: %h, expected %h", i, got[i], WORDS[i]))
    `CHECK(t_done == N * 34 * H, $sformatf("done after %0d cycles, expected %0d", t_done, N * 34 * H))
    `CHECK(lcd_scen && !lcd_sclk, "port idle after configuration")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
