// adc_model -- behavioural model of the touch panel's 12-bit ADC.
//
// Not synthesizable; used only by the testbenches. It answers the serial
// frames of adc_spi_ctrl: while adc_cs_n is low it takes 8 command bits on
// the rising edges of adc_dclk, then shifts out a 12-bit result MSB first,
// one bit after each falling edge from the falling edge of clock 8 on, so
// the master reads it on rising edges 9..20. The result is x_val for
// command CMD_X and y_val for CMD_Y; any other command is counted in
// bad_cmds and answered with zero. adc_penirq_n is low while `touch` is 1.
module adc_model #(
  parameter logic [7:0] CMD_X = 8'h92,
  parameter logic [7:0] CMD_Y = 8'hD2
) (
  input  logic        touch,
  input  logic [11:0] x_val,
  input  logic [11:0] y_val,
  input  logic        adc_cs_n,
  input  logic        adc_dclk,
  input  logic        adc_din,
  output logic        adc_dout,
  output logic        adc_penirq_n,
  output int          frames,
  output int          bad_cmds
);

  int          rises;
  logic [7:0]  cmd;
  logic [11:0] result;

  assign adc_penirq_n = ~touch;

  initial begin
    adc_dout = 1'b0;
    frames   = 0;
    bad_cmds = 0;
    rises    = 0;
    cmd      = '0;
    result   = '0;
  end

  always @(negedge adc_cs_n) begin
    rises    = 0;
    adc_dout = 1'b0;
  end

  always @(posedge adc_dclk) begin
    if (!adc_cs_n) begin
      if (rises < 8) cmd = {cmd[6:0], adc_din};
      rises++;
      if (rises == 8) begin
        frames++;
        if (cmd == CMD_X)      result = x_val;
        else if (cmd == CMD_Y) result = y_val;
        else begin
          result = '0;
          bad_cmds++;
        end
      end
    end
  end

  always @(negedge adc_dclk) begin
    if (!adc_cs_n) begin
      if (rises >= 9 && rises <= 20) adc_dout = result[20 - rises];
      else                           adc_dout = 1'b0;
    end
  end

endmodule
