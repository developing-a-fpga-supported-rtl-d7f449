// reg_mem_ctrl -- coordinate register and picture-memory control.
//
// Every X/Y pair from the ADC block is stored in a coordinate register,
// which feeds the 7-segment display block, and is then painted into the
// picture memory that both screens scan out:
//
//  * The 12-bit ADC readings are mapped to a canvas pixel. The paper's
//    figure of the panel's active area prints (X=0,Y=0) bottom left,
//    (X=FFF,Y=0) top left, (X=FFF,Y=FFF) top right and (X=0,Y=FFF) bottom
//    right, so Y runs along the columns and X up the rows:
//      column = (Y * CANVAS_W) >> 12,  row = ((4095 - X) * CANVAS_H) >> 12.
//  * A square brush centred on that pixel is written, one pixel per clock,
//    clipped at the canvas edges. Side NORMAL_SIZE, or BOLD_SIZE in the
//    bold modes. The colour code written is the ink colour (red or blue)
//    when drawing and the background code when erasing.
//  * "Clear screen" writes the background code to every pixel, one per
//    clock. A clear also runs once after reset, since the memory itself is
//    not reset. A clear request that arrives while a brush is being painted
//    waits until the brush is done.
//  * A sample that arrives while a brush or a clear is still being written
//    is not painted (drop pulses for one cycle); it still updates the
//    coordinate register.
//
// The paper names the draw, erase, draw bold, erase bold, red/blue and clear
// functions and says the coordinates are kept in internal registers instead
// of the external SDRAM. The mapping comes from the figure; the brush
// shapes, sizes and the drop rule are this design's choices.
//
// Timing: a brush takes side*side clocks (fewer when clipped) starting the
// cycle after sample_valid; a clear takes CANVAS_W*CANVAS_H clocks.
module reg_mem_ctrl
  import touch_pkg::*;
#(
  parameter int unsigned NORMAL_SIZE = 3,   // brush side, draw / erase
  parameter int unsigned BOLD_SIZE   = 7,   // brush side, draw bold / erase bold
  parameter int unsigned AW          = $clog2(CANVAS_W * CANVAS_H)
) (
  input  logic          clk,
  input  logic          rst_n,
  // from the ADC block
  input  touch_t        sample,
  input  logic          sample_valid,
  // from the control buttons
  input  mode_t         mode,
  input  logic          clear_req,      // one-cycle pulse
  // coordinate register
  output touch_t        coord,
  output logic          coord_seen,     // a sample has arrived since reset
  // picture memory write port
  output logic          fb_we,
  output logic [AW-1:0] fb_waddr,
  output pix_e          fb_wdata,
  // status
  output logic          busy,           // painting or clearing
  output logic          drop            // a sample was not painted
);

  localparam int unsigned DEPTH = CANVAS_W * CANVAS_H;

  typedef enum logic [1:0] {S_IDLE, S_PAINT, S_CLEAR} state_e;

  state_e       state;
  logic [11:0]  col0, col1, row1;   // brush box, inclusive, clipped
  logic [11:0]  col, row;                 // current brush pixel
  pix_e         ink_code;
  logic         clear_pend;
  logic [AW-1:0] clr_addr;

  // ADC reading -> canvas pixel
  logic [11:0]  map_col, map_row;
  int           half, c_lo, c_hi, r_lo, r_hi;

  always_comb begin
    map_col = 12'((24'(sample.y) * 24'(CANVAS_W)) >> ADC_BITS);
    map_row = 12'((24'(12'hFFF - sample.x) * 24'(CANVAS_H)) >> ADC_BITS);
    half    = mode.bold ? int'((BOLD_SIZE - 1) / 2) : int'((NORMAL_SIZE - 1) / 2);
    c_lo    = int'(map_col) - half;
    c_hi    = int'(map_col) + half;
    r_lo    = int'(map_row) - half;
    r_hi    = int'(map_row) + half;
    if (c_lo < 0) c_lo = 0;
    if (r_lo < 0) r_lo = 0;
    if (c_hi > int'(CANVAS_W) - 1) c_hi = int'(CANVAS_W) - 1;
    if (r_hi > int'(CANVAS_H) - 1) r_hi = int'(CANVAS_H) - 1;
  end

  assign busy = (state != S_IDLE) || clear_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coord      <= '0;
      coord_seen <= 1'b0;
    end else if (sample_valid) begin
      coord      <= sample;
      coord_seen <= 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_CLEAR;        // clear the picture once after reset
      clr_addr   <= '0;
      clear_pend <= 1'b0;
      col0 <= '0; col1 <= '0; row1 <= '0;
      col  <= '0; row  <= '0;
      ink_code   <= PIX_BG;
      fb_we      <= 1'b0;
      fb_waddr   <= '0;
      fb_wdata   <= PIX_BG;
      drop       <= 1'b0;
    end else begin
      fb_we <= 1'b0;
      drop  <= sample_valid && (state != S_IDLE || clear_req || clear_pend);
      if (clear_req && state == S_PAINT) clear_pend <= 1'b1;
      case (state)
        S_IDLE: begin
          if (clear_req || clear_pend) begin
            clear_pend <= 1'b0;
            clr_addr   <= '0;
            state      <= S_CLEAR;
          end else if (sample_valid) begin
            col0 <= 12'(c_lo); col1 <= 12'(c_hi);
            row1 <= 12'(r_hi);
            col  <= 12'(c_lo); row  <= 12'(r_lo);
            ink_code <= mode.erase ? PIX_BG : (mode.ink == INK_BLUE ? PIX_BLUE : PIX_RED);
            state <= S_PAINT;
          end
        end
        S_PAINT: begin
          fb_we    <= 1'b1;
          fb_waddr <= AW'(32'(row) * CANVAS_W + 32'(col));
          fb_wdata <= ink_code;
          if (col == col1) begin
            col <= col0;
            if (row == row1) state <= S_IDLE;
            else             row   <= row + 1'b1;
          end else begin
            col <= col + 1'b1;
          end
        end
        S_CLEAR: begin
          fb_we    <= 1'b1;
          fb_waddr <= clr_addr;
          fb_wdata <= PIX_BG;
          if (32'(clr_addr) == DEPTH - 1) state <= S_IDLE;
          else                             clr_addr <= clr_addr + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_brush_in_canvas: assert property (@(posedge clk) disable iff (!rst_n)
                                      fb_we |-> (32'(fb_waddr) < DEPTH));

endmodule
