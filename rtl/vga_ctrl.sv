// vga_ctrl -- VGA output to a monitor or projector through a video DAC.
//
// Generates horizontal and vertical VGA sync and the pixel colours for the
// board's ADV7123 triple 10-bit video DAC, so the drawing on the touch
// panel also appears on a monitor or projector. The frame is 800 x 600 at
// 60 Hz (VESA timing, 40 MHz pixel clock, positive sync pulses), chosen
// because its width equals the 800-pixel canvas: the 800 x 400 canvas is
// shown 1:1 in rows V_OFFSET .. V_OFFSET+399, and the rows above and below
// are black. Each canvas pixel is read from the picture memory (read port
// B) and turned into a colour by touch_pkg::palette; the 8-bit channels are
// widened to the DAC's 10 bits by repeating their top two bits.
//
// Pipeline: as in glcd_timing, the pins lag the raster counter by two
// clocks (one for the memory read, one for the output registers), and sync,
// blank and colour stay aligned. vga_clk is the system clock, which must
// then run at the pixel rate times CLK_DIV (40 MHz for CLK_DIV = 1).
//
// The paper says only that this module synchronises the VGA signal
// horizontally and vertically and sends the picture to a monitor or
// projector through the VGA chip (the ADV7123 is printed in its board
// figure). Resolution, timing, placement and the DAC width are this
// design's choices.
module vga_ctrl
  import touch_pkg::*;
#(
  parameter int unsigned CLK_DIV  = 1,
  parameter int unsigned H_ACTIVE = 800,
  parameter int unsigned H_FP     = 40,
  parameter int unsigned H_SYNC   = 128,
  parameter int unsigned H_BP     = 88,
  parameter int unsigned V_ACTIVE = 600,
  parameter int unsigned V_FP     = 1,
  parameter int unsigned V_SYNC   = 4,
  parameter int unsigned V_BP     = 23,
  parameter int unsigned V_OFFSET = 100,   // first screen row of the canvas
  parameter int unsigned AW       = $clog2(CANVAS_W * CANVAS_H)
) (
  input  logic          clk,
  input  logic          rst_n,
  // picture memory read port
  output logic [AW-1:0] fb_raddr,
  input  pix_e          fb_rdata,
  // video DAC / connector pins
  output logic          vga_clk,
  output logic          vga_hs,
  output logic          vga_vs,
  output logic          vga_blank_n,
  output logic          vga_sync_n,
  output logic [9:0]    vga_r,
  output logic [9:0]    vga_g,
  output logic [9:0]    vga_b,
  output logic          frame_start
);

  logic    pix_en;
  raster_t rast, rast_d;
  logic    in_canvas, in_canvas_d;
  logic [11:0] crow;
  logic [23:0] rgb;

  clk_enable #(.DIV(CLK_DIV)) u_en (.clk, .rst_n, .en(pix_en));

  video_timing #(
    .H_ACTIVE(H_ACTIVE), .H_FP(H_FP), .H_SYNC(H_SYNC), .H_BP(H_BP),
    .V_ACTIVE(V_ACTIVE), .V_FP(V_FP), .V_SYNC(V_SYNC), .V_BP(V_BP)
  ) u_tim (.clk, .rst_n, .pix_en, .rast, .frame_start);

  assign crow      = rast.y - 12'(V_OFFSET);
  assign in_canvas = rast.active && (32'(rast.x) < CANVAS_W) &&
                     (32'(rast.y) >= V_OFFSET) && (32'(rast.y) < V_OFFSET + CANVAS_H);
  assign fb_raddr  = in_canvas ? AW'(32'(crow) * CANVAS_W + 32'(rast.x)) : '0;
  assign rgb       = in_canvas_d ? palette(fb_rdata) : 24'h00_00_00;
  assign vga_clk   = clk;
  assign vga_sync_n = 1'b0;   // no sync-on-green

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rast_d      <= '0;
      in_canvas_d <= 1'b0;
      vga_hs      <= 1'b0;
      vga_vs      <= 1'b0;
      vga_blank_n <= 1'b0;
      vga_r       <= '0;
      vga_g       <= '0;
      vga_b       <= '0;
    end else begin
      rast_d      <= rast;
      in_canvas_d <= in_canvas;
      vga_hs      <= rast_d.hsync;
      vga_vs      <= rast_d.vsync;
      vga_blank_n <= rast_d.active;
      vga_r       <= rast_d.active ? {rgb[23:16], rgb[23:22]} : 10'd0;
      vga_g       <= rast_d.active ? {rgb[15:8],  rgb[15:14]} : 10'd0;
      vga_b       <= rast_d.active ? {rgb[7:0],   rgb[7:6]}   : 10'd0;
    end
  end

endmodule
