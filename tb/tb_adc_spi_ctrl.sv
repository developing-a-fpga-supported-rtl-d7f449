// tb_adc_spi_ctrl -- checks the touch ADC serial master against the
// behavioural ADC model: correct command bytes, X/Y values read back
// exactly, no traffic while the pen is up, the frame length (97 half
// serial clocks from the first chip select to the result) and the sample
// period (97*SPI_HALF + SAMPLE_GAP + 2 clocks while the pen stays down).
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_adc_spi_ctrl;
  import touch_pkg::*;
  localparam int unsigned H   = 2;
  localparam int unsigned GAP = 20;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic touch = 0;
  logic [11:0] x_val = '0, y_val = '0;
  logic adc_penirq_n, adc_dout, adc_din, adc_dclk, adc_cs_n, pen_down, sample_valid;
  touch_t sample;
  int frames, bad_cmds;
  longint cyc = 0, t_cs = -1, t_valid = -1, t_prev_valid = -1;
  int nvalid = 0;

  adc_spi_ctrl #(.SPI_HALF(H), .SAMPLE_GAP(GAP)) dut (.*);
  adc_model adc (.touch, .x_val, .y_val, .adc_cs_n, .adc_dclk, .adc_din,
                 .adc_dout, .adc_penirq_n, .frames, .bad_cmds);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // first chip-select of a pair: cs falls while no pair is in progress
  logic in_pair = 0;
  always @(negedge adc_cs_n) if (!in_pair) begin t_cs = cyc; in_pair = 1; end

  initial begin
    int f0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // pen up: no frames
    repeat (500) @(posedge clk);
    `CHECK(frames == 0 && adc_cs_n, "no ADC traffic while the pen is up")
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      x_val = (n == 0) ? 12'hFFF : 12'($urandom);
      y_val = (n == 0) ? 12'h000 : 12'($urandom);
      touch = 1;
      // wait for the result
      while (!sample_valid) @(negedge clk);
      nvalid++;
      t_valid = cyc;
      `CHECK(sample.x == x_val && sample.y == y_val,
             $sformatf("sample %0d: got x=%h y=%h, expected x=%h y=%h", n, sample.x, sample.y, x_val, y_val))
      `CHECK(t_valid - t_cs == 97 * H,
             $sformatf("chip select to result %0d cycles, expected %0d", t_valid - t_cs, 97 * H))
      if (n % 4 != 3 && t_prev_valid >= 0)
        `CHECK(t_valid - t_prev_valid == 97 * H + GAP + 2,
               $sformatf("sample period %0d, expected %0d", t_valid - t_prev_valid, 97 * H + GAP + 2))
      t_prev_valid = t_valid;
      in_pair = 0;
      if (n % 4 == 2) begin
        // lift the pen: traffic must stop
        @(negedge clk) touch = 0;
        repeat (GAP + 20) @(posedge clk);
        f0 = frames;
        repeat (1000) @(posedge clk);
        `CHECK(frames == f0 && !pen_down, "traffic stops when the pen is lifted")
        t_prev_valid = -1;
      end
    end
    `CHECK(bad_cmds == 0, $sformatf("%0d unexpected command bytes", bad_cmds))
    `CHECK(frames == 2 * nvalid, $sformatf("%0d frames for %0d samples", frames, nvalid))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
