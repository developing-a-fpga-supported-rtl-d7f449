// glcd_spi -- serial configuration port of the LCD driver chip.
//
// After reset this block writes N_WORDS 16-bit configuration words from
// INIT_WORDS to the LCD driver over a 3-wire serial port and then raises
// `done`. Each word is one frame: lcd_scen goes low, the 16 bits follow MSB
// first on lcd_sda, changed while lcd_sclk is low and taken by the driver
// on the rising edge, then lcd_scen goes high for one serial clock period
// before the next frame. lcd_sclk = clk / (2*SPI_HALF).
//
// The paper describes this sub-module as the one that sets up the protocol
// between the LCD driver chip and the FPGA, but gives neither the protocol
// nor the register settings. The frame format here is a common 3-wire
// write. The default INIT_WORDS are placeholders (all write zero to
// register 0); the real settings of the LCD driver must be filled in.
//
// Timing: each word takes 32*SPI_HALF clocks plus 2*SPI_HALF clocks with
// lcd_scen high; done rises N_WORDS*34*SPI_HALF clocks after reset.
module glcd_spi #(
  parameter int unsigned SPI_HALF = 16,
  parameter int unsigned N_WORDS  = 2,
  parameter logic [15:0] INIT_WORDS [N_WORDS] = '{16'h0000, 16'h0000}
) (
  input  logic clk,
  input  logic rst_n,
  output logic lcd_scen,
  output logic lcd_sclk,
  output logic lcd_sda,
  output logic done
);

  localparam int unsigned HW = $clog2(SPI_HALF + 1);
  localparam int unsigned WW = (N_WORDS > 1) ? $clog2(N_WORDS) : 1;

  typedef enum logic [1:0] {S_SEND, S_GAP, S_DONE} state_e;

  state_e        state;
  logic [HW-1:0] half_cnt;
  logic [4:0]    bit_idx;     // 0..15
  logic [WW-1:0] word_idx;
  logic          gap_half;    // second half of the gap
  logic          half_done;
  logic [15:0]   word;

  assign half_done = (half_cnt == HW'(SPI_HALF - 1));
  assign word      = INIT_WORDS[word_idx];
  assign lcd_sda   = (state == S_SEND) && word[4'd15 - bit_idx[3:0]];
  assign lcd_scen  = (state != S_SEND);
  assign done      = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= (N_WORDS == 0) ? S_DONE : S_SEND;
      half_cnt <= '0;
      bit_idx  <= '0;
      word_idx <= '0;
      gap_half <= 1'b0;
      lcd_sclk <= 1'b0;
    end else begin
      case (state)
        S_SEND: begin
          half_cnt <= half_done ? '0 : half_cnt + 1'b1;
          if (half_done) begin
            lcd_sclk <= ~lcd_sclk;
            if (lcd_sclk) begin            // falling edge: next bit
              if (bit_idx == 5'd15) begin
                bit_idx  <= '0;
                gap_half <= 1'b0;
                state    <= S_GAP;
              end else begin
                bit_idx <= bit_idx + 1'b1;
              end
            end
          end
        end
        S_GAP: begin
          half_cnt <= half_done ? '0 : half_cnt + 1'b1;
          if (half_done) begin
            gap_half <= ~gap_half;
            if (gap_half) begin
              if (32'(word_idx) == N_WORDS - 1) begin
                state <= S_DONE;
              end else begin
                word_idx <= word_idx + 1'b1;
                state    <= S_SEND;
              end
            end
          end
        end
        default: state <= S_DONE;
      endcase
    end
  end

  a_sclk_in_frame: assert property (@(posedge clk) disable iff (!rst_n)
                                    lcd_scen |-> !lcd_sclk);

endmodule
