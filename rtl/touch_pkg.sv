// touch_pkg -- types and constants shared by the touchscreen drawing board.
//
// The board reads pen positions from a resistive touch panel through a
// 12-bit ADC, paints them into an on-chip picture memory and shows that
// picture on the panel's own graphic LCD and, at the same time, on a VGA
// monitor or projector. The X and Y readings are also shown in hex on six
// 7-segment digits.
//
// Numbers taken from the paper: 12-bit X/Y readings, an 800 x 400 pixel
// LCD with 24-bit colour, six 7-segment digits (three for X, three for Y),
// the drawing modes draw / erase / draw bold / erase bold, the pen colours
// red and blue, and "clear screen". Everything else here (the 2-bit pixel
// code, the palette, the brush sizes) is this design's own choice.
package touch_pkg;

  // Touch ADC resolution (paper: 12-bit X and Y).
  localparam int unsigned ADC_BITS = 12;

  // Canvas = graphic LCD active area (paper: 800 x 400 pixels).
  localparam int unsigned CANVAS_W = 800;
  localparam int unsigned CANVAS_H = 400;

  // Colour code stored per pixel in the picture memory.
  typedef enum logic [1:0] {
    PIX_BG   = 2'd0,   // background (white board)
    PIX_RED  = 2'd1,   // red ink
    PIX_BLUE = 2'd2    // blue ink
  } pix_e;

  // Pen colour selected with the control buttons.
  typedef enum logic {
    INK_RED  = 1'b0,
    INK_BLUE = 1'b1
  } ink_e;

  // Drawing mode as set by the control buttons.
  typedef struct packed {
    logic erase;   // 1: pen writes background, 0: pen writes ink
    logic bold;    // 1: large brush, 0: normal brush
    ink_e ink;     // ink colour used when erase = 0
  } mode_t;

  // One touch sample from the ADC.
  typedef struct packed {
    logic [ADC_BITS-1:0] x;
    logic [ADC_BITS-1:0] y;
  } touch_t;

  // Raster position and sync flags produced by a timing generator.
  typedef struct packed {
    logic        hsync;   // active-high here; polarity applied at the pins
    logic        vsync;
    logic        active;  // inside the visible area
    logic [11:0] x;       // pixel column inside the visible area
    logic [11:0] y;       // pixel row inside the visible area
  } raster_t;

  // 24-bit colour of each pixel code (8 bits per channel).
  function automatic logic [23:0] palette(input pix_e p);
    case (p)
      PIX_RED:  return 24'hFF_00_00;
      PIX_BLUE: return 24'h00_00_FF;
      default:  return 24'hFF_FF_FF;
    endcase
  endfunction

endpackage
