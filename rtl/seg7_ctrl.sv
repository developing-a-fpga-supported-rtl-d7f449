// seg7_ctrl -- shows the touched X/Y coordinates on six 7-segment digits.
//
// The latest 12-bit X and Y readings are each split into three hex
// digits, so the six displays show "XXX YYY": hex[5] is the top nibble of
// X, hex[3] its bottom nibble, hex[2] the top nibble of Y and hex[0] its
// bottom nibble. Until the first touch after reset the digits are dark.
// Each hex[i] drives one display with segments a..g on bits 0..6, active
// low (a 0 lights the segment). Outputs are registered: they follow the
// inputs one clock later.
//
// The paper gives six displays and says this module splits X and Y into
// groups of three digits; hex notation (three 4-bit digits for a 12-bit
// reading), the digit order and the segment polarity are this design's
// choices.
module seg7_ctrl
  import touch_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  touch_t     coord,
  input  logic       coord_seen,
  output logic [6:0] hex [6]
);

  // segments {g,f,e,d,c,b,a}, 1 = lit
  function automatic logic [6:0] seg_of(input logic [3:0] d);
    case (d)
      4'h0: return 7'b0111111;
      4'h1: return 7'b0000110;
      4'h2: return 7'b1011011;
      4'h3: return 7'b1001111;
      4'h4: return 7'b1100110;
      4'h5: return 7'b1101101;
      4'h6: return 7'b1111101;
      4'h7: return 7'b0000111;
      4'h8: return 7'b1111111;
      4'h9: return 7'b1101111;
      4'hA: return 7'b1110111;
      4'hB: return 7'b1111100;
      4'hC: return 7'b0111001;
      4'hD: return 7'b1011110;
      4'hE: return 7'b1111001;
      default: return 7'b1110001;   // F
    endcase
  endfunction

  logic [3:0] nib [6];

  always_comb begin
    nib[5] = coord.x[11:8];
    nib[4] = coord.x[7:4];
    nib[3] = coord.x[3:0];
    nib[2] = coord.y[11:8];
    nib[1] = coord.y[7:4];
    nib[0] = coord.y[3:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 6; i++) hex[i] <= 7'h7F;
    end else begin
      for (int i = 0; i < 6; i++) hex[i] <= coord_seen ? ~seg_of(nib[i]) : 7'h7F;
    end
  end

endmodule
