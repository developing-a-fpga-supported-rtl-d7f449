// tb_delay_ctrl -- checks the start-up delay: `ready` must stay low for
// exactly DELAY_CYCLES clocks after reset is released, then stay high, and
// a new reset must start the delay again.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_delay_ctrl;
  localparam int unsigned D = 50;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ready;
  int cyc;

  delay_ctrl #(.DELAY_CYCLES(D)) dut (.clk, .rst_n, .ready);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(input string tag);
    cyc = 0;
    @(negedge clk) rst_n = 1;
    while (!ready && cyc < 10 * D) begin
      @(posedge clk); #1;
      cyc++;
    end
    `CHECK(cyc == D, $sformatf("%s: ready after %0d cycles, expected %0d", tag, cyc, D))
    repeat (3 * D) begin
      @(posedge clk); #1;
      `CHECK(ready, $sformatf("%s: ready dropped", tag))
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    `CHECK(!ready, "ready during reset")
    measure("first");
    @(negedge clk) rst_n = 0;
    #1 `CHECK(!ready, "ready cleared by reset")
    repeat (2) @(posedge clk);
    measure("second");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
