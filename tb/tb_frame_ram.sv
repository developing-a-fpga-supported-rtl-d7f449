// tb_frame_ram -- checks the picture memory: writes, two independent
// registered read ports (data one clock after the address) and
// read-before-write on a same-cycle collision. A small depth is used.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_frame_ram;
  import touch_pkg::*;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW = 6;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we = 0;
  logic [AW-1:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  pix_e wdata = PIX_BG, rdata_a, rdata_b;
  pix_e model [DEPTH];

  frame_ram #(.DEPTH(DEPTH), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pix_e rnd_pix();
    case ($urandom_range(2))
      0: return PIX_BG;
      1: return PIX_RED;
      default: return PIX_BLUE;
    endcase
  endfunction

  initial begin
    pix_e ea, eb;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = rnd_pix(); model[i] = wdata;
    end
    @(negedge clk) we = 0;
    // random reads and writes
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      raddr_a = AW'($urandom); raddr_b = AW'($urandom);
      if (n % 5 == 0) raddr_b = raddr_a;
      we = $urandom_range(1); waddr = AW'($urandom); wdata = rnd_pix();
      if (n % 7 == 0) waddr = raddr_a;
      ea = model[raddr_a];  // value before this cycle's write
      eb = model[raddr_b];
      @(posedge clk); #1;
      `CHECK(rdata_a == ea, $sformatf("port A addr %0d: %0d, expected %0d", raddr_a, rdata_a, ea))
      `CHECK(rdata_b == eb, $sformatf("port B addr %0d: %0d, expected %0d", raddr_b, rdata_b, eb))
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
