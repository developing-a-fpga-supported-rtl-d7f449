// clk_enable -- divides the system clock into a one-cycle enable pulse.
//
// `en` is high on one clock out of every DIV (always high for DIV = 1).
// Used to run the display timing at a pixel rate below the system clock.
module clk_enable #(
  parameter int unsigned DIV = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic en
);

  if (DIV <= 1) begin : g_always
    assign en = 1'b1;
  end else begin : g_div
    localparam int unsigned CW = $clog2(DIV);
    logic [CW-1:0] cnt;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                       cnt <= '0;
      else if (cnt == CW'(DIV - 1))     cnt <= '0;
      else                              cnt <= cnt + 1'b1;
    end
    assign en = (cnt == CW'(DIV - 1));
  end

endmodule
