// delay_ctrl -- start-up delay for the drawing board.
//
// After the reset button is released this block keeps its output `ready`
// low for DELAY_CYCLES clock cycles and then raises it for good. The other
// modules are held in reset (rst_n & ready) until then, so that the LCD,
// the ADC and the VGA DAC have settled before the FPGA starts talking to
// them. The paper only says that this module lets the other modules run
// "after a certain delay time"; the delay length and the use of a single
// down-counter are this design's choices.
//
// Interface: clk, rst_n (asynchronous, active low) in; ready out.
// Timing: ready rises exactly DELAY_CYCLES rising clock edges after the
// first edge that sees rst_n high, and stays high until the next reset.
module delay_ctrl #(
  parameter int unsigned DELAY_CYCLES = 1_000_000   // ~25 ms at 40 MHz
) (
  input  logic clk,
  input  logic rst_n,
  output logic ready
);

  localparam int unsigned CW = $clog2(DELAY_CYCLES + 1);

  logic [CW-1:0] count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      ready <= 1'b0;
    end else if (!ready) begin
      if (count == CW'(DELAY_CYCLES - 1)) ready <= 1'b1;
      count <= count + 1'b1;
    end
  end

endmodule
