// preamp_spi: writes the gain of the LTC6912 dual programmable-gain amplifier.
//
// On `load` the 8-bit word {gain_b, gain_a} is shifted out MSB first on
// spi_mosi while amp_cs is low. spi_sck runs at clk/(2*HALF_PERIOD): mosi is
// changed while sck is low and held for a whole high phase, so the amplifier
// latches each bit on the rising sck edge; amp_cs rises after the eighth bit,
// which makes the amplifier apply the new gain. `busy` is high from the cycle
// after `load` until amp_cs has been released; `done` pulses once at the end.
// The amplifier echoes the previous word on amp_dout; it is captured on each
// rising edge into `prev_word` so the write can be checked.
//
// Timing: 8 bits * 2*HALF_PERIOD clocks plus 2 clocks of chip-select set-up
// and hold; 34 clocks at the default HALF_PERIOD of 2 (1.25 MHz sck).
// That the gain is set over SPI from a debounced one-shot comes from the
// design description; the word layout (channel B nibble first) and the bit
// timing follow the LTC6912 data sheet and are not part of the description.
module preamp_spi #(
  parameter int unsigned HALF_PERIOD = 2   // clocks per sck phase
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       load,       // one-cycle request
  input  logic [3:0] gain_a,     // LTC6912 gain code, channel A
  input  logic [3:0] gain_b,     // LTC6912 gain code, channel B
  output logic       busy,
  output logic       done,
  output logic       spi_sck,
  output logic       spi_mosi,
  output logic       amp_cs,     // active low
  input  logic       amp_dout,
  output logic [7:0] prev_word   // word the amplifier held before this write
);

  localparam int unsigned HW = $clog2(HALF_PERIOD + 1);

  typedef enum logic [1:0] {P_IDLE, P_SETUP, P_SHIFT, P_HOLD} pstate_e;

  pstate_e       st_q;
  logic [6:0]    sh_q;       // bits still to send after the one on mosi
  logic [2:0]    bit_q;
  logic [HW-1:0] ph_cnt_q;
  logic [7:0]    rx_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      st_q      <= P_IDLE;
      sh_q      <= '0;
      bit_q     <= '0;
      ph_cnt_q  <= '0;
      rx_q      <= '0;
      prev_word <= '0;
      spi_sck   <= 1'b0;
      spi_mosi  <= 1'b0;
      amp_cs    <= 1'b1;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        P_IDLE: if (load) begin
          sh_q     <= {gain_b[2:0], gain_a};
          spi_mosi <= gain_b[3];
          amp_cs   <= 1'b0;
          bit_q    <= '0;
          ph_cnt_q <= '0;
          st_q     <= P_SETUP;
        end
        P_SETUP: st_q <= P_SHIFT;           // one clock of cs-to-sck set-up
        P_SHIFT: begin
          if (ph_cnt_q == HW'(HALF_PERIOD - 1)) begin
            ph_cnt_q <= '0;
            if (!spi_sck) begin              // rising edge: amplifier samples mosi
              spi_sck <= 1'b1;
              rx_q    <= {rx_q[6:0], amp_dout};
            end else begin                   // falling edge: next bit
              spi_sck <= 1'b0;
              sh_q    <= {sh_q[5:0], 1'b0};
              spi_mosi <= sh_q[6];
              if (bit_q == 3'd7) st_q <= P_HOLD;
              bit_q   <= bit_q + 1'b1;
            end
          end else begin
            ph_cnt_q <= ph_cnt_q + 1'b1;
          end
        end
        P_HOLD: begin
          amp_cs    <= 1'b1;
          spi_mosi  <= 1'b0;
          prev_word <= rx_q;
          done      <= 1'b1;
          st_q      <= P_IDLE;
        end
        default: st_q <= P_IDLE;
      endcase
    end
  end

  assign busy = (st_q != P_IDLE);

endmodule
