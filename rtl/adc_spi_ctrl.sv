// adc_spi_ctrl -- serial-port master for the touch panel's ADC.
//
// While the pen touches the panel (pen interrupt adc_penirq_n low) this
// block repeatedly reads one X and one Y conversion from the ADC and hands
// the pair on as one 12-bit X / 12-bit Y sample. Each conversion is one
// chip-select frame of 24 serial clocks: the FPGA sends an 8-bit command
// (MSB first, adc_din changed while adc_dclk is low, taken by the ADC on
// the rising edge), the ADC spends clock 8 converting, then shifts the 12
// result bits out MSB first; they are sampled on rising clock edges 9..20.
// Clocks 21..23 pad the frame to three bytes. After the Y frame the pair is
// presented on `sample` with a one-cycle `sample_valid` pulse and the block
// waits SAMPLE_GAP cycles before it looks at the pen again.
//
// The paper gives the function (read 12-bit X/Y from the ADC over a serial
// port) but not the protocol. The 24-clock frame, the command bytes and the
// rates are this design's assumptions, modelled on common 4-wire
// touch-screen ADCs.
//
// Timing: one X/Y pair takes 2 * (48 * SPI_HALF) + SPI_HALF cycles of
// serial traffic, then SAMPLE_GAP idle cycles. adc_dclk = clk / (2*SPI_HALF).
module adc_spi_ctrl
  import touch_pkg::*;
#(
  parameter int unsigned SPI_HALF   = 16,       // clk cycles per half serial clock
  parameter int unsigned SAMPLE_GAP = 40_000,   // idle cycles between samples
  parameter logic [7:0]  CMD_X      = 8'h92,    // command byte: measure X
  parameter logic [7:0]  CMD_Y      = 8'hD2     // command byte: measure Y
) (
  input  logic   clk,
  input  logic   rst_n,
  // ADC pins
  input  logic   adc_penirq_n,   // low while the panel is touched
  input  logic   adc_dout,
  output logic   adc_din,
  output logic   adc_dclk,
  output logic   adc_cs_n,
  // result
  output logic   pen_down,       // synchronised pen state
  output touch_t sample,
  output logic   sample_valid
);

  localparam int unsigned HW = $clog2(SPI_HALF + 1);
  localparam int unsigned GW = $clog2(SAMPLE_GAP + 2);

  typedef enum logic [1:0] {S_IDLE, S_CONV, S_CSGAP, S_GAP} state_e;

  state_e               state;
  logic [HW-1:0]        half_cnt;
  logic [4:0]           bit_idx;
  logic                 chan_y;     // 0: X frame, 1: Y frame
  logic [ADC_BITS-1:0]  shift;
  logic [GW-1:0]        gap_cnt;
  logic [1:0]           pen_sync;
  logic                 half_done;
  logic [7:0]           cmd;

  assign pen_down  = pen_sync[1];
  assign half_done = (half_cnt == HW'(SPI_HALF - 1));
  assign cmd       = chan_y ? CMD_Y : CMD_X;
  assign adc_din   = (state == S_CONV) && (bit_idx < 5'd8) && cmd[3'd7 - bit_idx[2:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pen_sync <= 2'b00;
    else        pen_sync <= {pen_sync[0], ~adc_penirq_n};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      half_cnt     <= '0;
      bit_idx      <= '0;
      chan_y       <= 1'b0;
      shift        <= '0;
      gap_cnt      <= '0;
      adc_dclk     <= 1'b0;
      adc_cs_n     <= 1'b1;
      sample       <= '0;
      sample_valid <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      case (state)
        S_IDLE: begin
          if (pen_down) begin
            state    <= S_CONV;
            adc_cs_n <= 1'b0;
            chan_y   <= 1'b0;
            bit_idx  <= '0;
            half_cnt <= '0;
          end
        end
        S_CONV: begin
          half_cnt <= half_done ? '0 : half_cnt + 1'b1;
          if (half_done) begin
            if (!adc_dclk) begin
              // rising edge: the ADC takes adc_din, the FPGA takes adc_dout
              adc_dclk <= 1'b1;
              if (bit_idx >= 5'd9 && bit_idx <= 5'd20)
                shift <= {shift[ADC_BITS-2:0], adc_dout};
            end else begin
              // falling edge: next bit
              adc_dclk <= 1'b0;
              if (bit_idx == 5'd23) begin
                adc_cs_n <= 1'b1;
                if (!chan_y) begin
                  sample.x <= shift;
                  chan_y   <= 1'b1;
                  state    <= S_CSGAP;
                end else begin
                  sample.y     <= shift;
                  sample_valid <= 1'b1;
                  gap_cnt      <= '0;
                  state        <= S_GAP;
                end
              end else begin
                bit_idx <= bit_idx + 1'b1;
              end
            end
          end
        end
        S_CSGAP: begin
          // chip select stays high for one half serial clock between frames
          half_cnt <= half_done ? '0 : half_cnt + 1'b1;
          if (half_done) begin
            adc_cs_n <= 1'b0;
            bit_idx  <= '0;
            state    <= S_CONV;
          end
        end
        S_GAP: begin
          gap_cnt <= gap_cnt + 1'b1;
          if (gap_cnt >= GW'(SAMPLE_GAP)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The serial clock only runs inside a chip-select frame.
  a_dclk_in_frame: assert property (@(posedge clk) disable iff (!rst_n)
                                    adc_cs_n |-> !adc_dclk);

endmodule
