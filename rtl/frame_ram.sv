// frame_ram -- on-chip picture memory.
//
// Holds one colour code (touch_pkg::pix_e) per canvas pixel, addressed
// row-major: address = row * CANVAS_W + column. It has one write port, used
// by the painter in reg_mem_ctrl, and two independent read ports, one for
// the graphic LCD scan-out and one for the VGA scan-out, so both screens
// show the same picture at the same time. All ports share one clock; reads
// are registered (data appears one clock after the address). A read and a
// write of the same address in the same cycle return the old contents.
//
// The paper says the coordinates are kept in "internal register RAM" of the
// FPGA instead of the external SDRAM; a full pixel memory of this form is
// this design's reading of that. At 800 x 400 x 2 bits it needs 640 kbit,
// which fits in the 1.1 Mbit of block RAM of the Cyclone II EP2C70 the
// paper names. An FPGA tool builds the second read port by duplicating the
// memory. The contents are not reset; reg_mem_ctrl clears them at start-up.
module frame_ram
  import touch_pkg::*;
#(
  parameter int unsigned DEPTH = CANVAS_W * CANVAS_H,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  // write port (painter)
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  pix_e          wdata,
  // read port A (graphic LCD)
  input  logic [AW-1:0] raddr_a,
  output pix_e          rdata_a,
  // read port B (VGA)
  input  logic [AW-1:0] raddr_b,
  output pix_e          rdata_b
);

  logic [1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    rdata_a <= pix_e'(mem[raddr_a]);
    rdata_b <= pix_e'(mem[raddr_b]);
  end

  a_waddr_range: assert property (@(posedge clk) we |-> (32'(waddr) < DEPTH));

endmodule
