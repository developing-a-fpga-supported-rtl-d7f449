// glcd_timing -- timing and RGB stream for the touch module's graphic LCD.
//
// Generates the LCD's horizontal and vertical sync (ltm_hd, ltm_vd, active
// low), its data-enable ltm_den and 24-bit RGB, and the pixel clock
// ltm_nclk, which is the system clock itself. The visible area is the whole
// canvas, CANVAS_W x CANVAS_H = 800 x 400 pixels as the paper states for the
// 4.3 inch LCD, with 24-bit colour. Each visible pixel is read from the
// picture memory (read port A) and turned into a colour through
// touch_pkg::palette.
//
// Pipeline: the raster counter (video_timing) gives a position; the memory
// address row*CANVAS_W+col is formed from it combinationally; the memory
// answers one clock later, while the position is held one more stage; the
// outputs are registered from that. So the pins lag the raster counter by
// two clocks, sync and data alike, and stay aligned with each other. The
// raster counter advances on pix_en, one clock in CLK_DIV; the two pipeline
// stages run on every clock, so they stay aligned for any CLK_DIV.
//
// The paper names this sub-module and says it fixes the size, resolution
// and speed of the data sent to the LCD. The 800x400 size and 24-bit colour
// are the paper's; the porch and sync lengths below are this design's
// assumptions, as the paper gives none.
module glcd_timing
  import touch_pkg::*;
#(
  parameter int unsigned CLK_DIV = 1,
  parameter int unsigned H_FP    = 40,
  parameter int unsigned H_SYNC  = 1,
  parameter int unsigned H_BP    = 215,
  parameter int unsigned V_FP    = 10,
  parameter int unsigned V_SYNC  = 1,
  parameter int unsigned V_BP    = 34,
  parameter int unsigned AW      = $clog2(CANVAS_W * CANVAS_H)
) (
  input  logic          clk,
  input  logic          rst_n,
  // picture memory read port
  output logic [AW-1:0] fb_raddr,
  input  pix_e          fb_rdata,
  // LCD pins
  output logic          ltm_nclk,
  output logic          ltm_hd,
  output logic          ltm_vd,
  output logic          ltm_den,
  output logic [7:0]    ltm_r,
  output logic [7:0]    ltm_g,
  output logic [7:0]    ltm_b,
  output logic          frame_start
);

  logic    pix_en;
  raster_t rast, rast_d;
  logic [23:0] rgb;

  clk_enable #(.DIV(CLK_DIV)) u_en (.clk, .rst_n, .en(pix_en));

  video_timing #(
    .H_ACTIVE(CANVAS_W), .H_FP(H_FP), .H_SYNC(H_SYNC), .H_BP(H_BP),
    .V_ACTIVE(CANVAS_H), .V_FP(V_FP), .V_SYNC(V_SYNC), .V_BP(V_BP)
  ) u_tim (.clk, .rst_n, .pix_en, .rast, .frame_start);

  assign fb_raddr = AW'(32'(rast.y) * CANVAS_W + 32'(rast.x));
  assign rgb      = palette(fb_rdata);
  assign ltm_nclk = clk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rast_d  <= '0;
      ltm_hd  <= 1'b1;
      ltm_vd  <= 1'b1;
      ltm_den <= 1'b0;
      ltm_r   <= '0;
      ltm_g   <= '0;
      ltm_b   <= '0;
    end else begin
      rast_d  <= rast;
      ltm_hd  <= ~rast_d.hsync;
      ltm_vd  <= ~rast_d.vsync;
      ltm_den <= rast_d.active;
      ltm_r   <= rast_d.active ? rgb[23:16] : 8'h00;
      ltm_g   <= rast_d.active ? rgb[15:8]  : 8'h00;
      ltm_b   <= rast_d.active ? rgb[7:0]   : 8'h00;
    end
  end

endmodule
