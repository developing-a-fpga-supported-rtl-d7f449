// button_ctrl -- the board's control buttons, decoded into the drawing mode.
//
// Five push buttons (key_n, active low) select the drawing mode:
//   key 0  draw   (pen writes ink)        key 1  erase (pen writes background)
//   key 2  toggle bold (large brush)      key 3  toggle ink red <-> blue
//   key 4  clear the screen
// so "draw bold" is key 0 then key 2 and "erase bold" key 1 then key 2.
// The buttons are synchronised to clk and sampled once every DEB_CYCLES
// clocks, which debounces them; a press acts once, on the sample at which
// the button is first seen down. After reset the mode is draw, normal
// brush, red ink.
//
// The paper's board figure prints five control buttons and a separate
// reset button, and its usability tasks use the modes draw, erase, draw
// bold, erase bold, red/blue ink and clear screen. Which button does what,
// the toggles and the debounce period are this design's choices.
//
// Timing: a press is acted on at most DEB_CYCLES + 3 clocks after the pin
// goes low; clear_req is a one-clock pulse.
module button_ctrl
  import touch_pkg::*;
#(
  parameter int unsigned DEB_CYCLES = 400_000   // 10 ms at 40 MHz
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [4:0] key_n,
  output mode_t      mode,
  output logic       clear_req
);

  localparam int unsigned CW = $clog2(DEB_CYCLES + 1);

  logic [4:0]    s1, s2;       // synchroniser (1 = pressed)
  logic [4:0]    held;         // debounced state
  logic [4:0]    press;
  logic [CW-1:0] cnt;
  logic          tick;

  assign tick  = (cnt == CW'(DEB_CYCLES - 1));
  assign press = tick ? (s2 & ~held) : 5'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1   <= '0;
      s2   <= '0;
      held <= '0;
      cnt  <= '0;
    end else begin
      s1  <= ~key_n;
      s2  <= s1;
      cnt <= tick ? '0 : cnt + 1'b1;
      if (tick) held <= s2;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode      <= '{erase: 1'b0, bold: 1'b0, ink: INK_RED};
      clear_req <= 1'b0;
    end else begin
      clear_req <= press[4];
      if (press[0]) mode.erase <= 1'b0;
      if (press[1]) mode.erase <= 1'b1;
      if (press[2]) mode.bold  <= ~mode.bold;
      if (press[3]) mode.ink   <= (mode.ink == INK_RED) ? INK_BLUE : INK_RED;
    end
  end

endmodule
