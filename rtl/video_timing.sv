// video_timing -- raster counter shared by the LCD and VGA timing blocks.
//
// Counts pixels along a line and lines down a frame and derives the
// horizontal and vertical sync pulses and the visible-area flag. A line is
// H_ACTIVE visible pixels, then H_FP front porch, H_SYNC sync pulse and
// H_BP back porch; a frame is laid out the same way in lines. The counters
// advance on clocks where pix_en is high, so a slower pixel rate can be
// made from the system clock with an enable. Outputs are registered and
// belong to the pixel the counters held on the previous advance; `x` and
// `y` are the column and row inside the visible area (0 outside it).
// Sync polarity is active high here; the users apply the pin polarity.
module video_timing
  import touch_pkg::*;
#(
  parameter int unsigned H_ACTIVE = 800,
  parameter int unsigned H_FP     = 40,
  parameter int unsigned H_SYNC   = 128,
  parameter int unsigned H_BP     = 88,
  parameter int unsigned V_ACTIVE = 600,
  parameter int unsigned V_FP     = 1,
  parameter int unsigned V_SYNC   = 4,
  parameter int unsigned V_BP     = 23
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    pix_en,
  output raster_t rast,
  output logic    frame_start   // one pix_en step at pixel (0,0)
);

  localparam int unsigned H_TOTAL = H_ACTIVE + H_FP + H_SYNC + H_BP;
  localparam int unsigned V_TOTAL = V_ACTIVE + V_FP + V_SYNC + V_BP;

  logic [11:0] hc, vc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hc <= '0;
      vc <= '0;
    end else if (pix_en) begin
      if (hc == 12'(H_TOTAL - 1)) begin
        hc <= '0;
        vc <= (vc == 12'(V_TOTAL - 1)) ? '0 : vc + 1'b1;
      end else begin
        hc <= hc + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rast        <= '0;
      frame_start <= 1'b0;
    end else if (pix_en) begin
      rast.active <= (32'(hc) < H_ACTIVE) && (32'(vc) < V_ACTIVE);
      rast.hsync  <= (32'(hc) >= H_ACTIVE + H_FP) && (32'(hc) < H_ACTIVE + H_FP + H_SYNC);
      rast.vsync  <= (32'(vc) >= V_ACTIVE + V_FP) && (32'(vc) < V_ACTIVE + V_FP + V_SYNC);
      rast.x      <= (32'(hc) < H_ACTIVE) ? hc : '0;
      rast.y      <= (32'(vc) < V_ACTIVE) ? vc : '0;
      frame_start <= (hc == '0) && (vc == '0);
    end
  end

endmodule
