// afe_model: behavioural model of the analog front end (not synthesizable).
//
// Stands in for the LTC6912 programmable-gain amplifier and the LTC1407A
// dual 14-bit ADC that share one SPI bus. The analog input is a sine of
// `freq_hz` hertz and `amp_v` volts peak riding on the 1.65 V reference (set
// these variables hierarchically); `tone_on` = 0 gives silence.
//   amplifier: shifts mosi in on rising sck while amp_cs is low, shows the
//              previous word MSB first on amp_dout, applies the new word on
//              the rising edge of amp_cs that ends a selection. Gain codes 0..7 map to
//              0, -1, -2, -5, -10, -20, -50, -100 (inverting).
//   ADC:       samples both channels on the rising edge of ad_conv, code =
//              round(Vamp / 1.25 V * 8192) saturated to 14 bits, and shifts
//              out 2 idle bits, channel A, 2 idle bits, channel B, 2 idle
//              bits, MSB first, changing after each falling sck edge.
`timescale 1ns/1ps
module afe_model (
  input  logic spi_sck,
  input  logic spi_mosi,
  input  logic amp_cs,
  input  logic amp_shdn,
  input  logic ad_conv,
  output logic spi_miso,
  output logic amp_dout
);

  real    freq_hz = 293.66;
  real    amp_v   = 0.05;
  bit     tone_on = 1'b1;
  logic [7:0]  gain_word = 8'h11;       // power-up gain -1 on both channels
  logic [7:0]  sr = 8'h00;
  int          conversions = 0;
  int          gain_writes = 0;
  logic signed [13:0] last_a = '0, last_b = '0;
  logic [33:0] frame = '0;
  int          nfall = 0;

  function automatic real gain_of(input logic [3:0] code);
    case (code[2:0])
      3'd0: return 0.0;
      3'd1: return -1.0;
      3'd2: return -2.0;
      3'd3: return -5.0;
      3'd4: return -10.0;
      3'd5: return -20.0;
      3'd6: return -50.0;
      default: return -100.0;
    endcase
  endfunction

  function automatic logic signed [13:0] adc_code(input real v);
    real c;
    c = v / 1.25 * 8192.0;
    if (c > 8191.0)  c = 8191.0;
    if (c < -8192.0) c = -8192.0;
    return 14'($rtoi(c + ((c >= 0.0) ? 0.5 : -0.5)));
  endfunction

  // analog value relative to the 1.65 V reference at the current time
  function automatic real vin_now();
    real t;
    t = $realtime * 1.0e-9;
    return tone_on ? amp_v * $sin(2.0 * 3.14159265358979 * freq_hz * t) : 0.0;
  endfunction

  // amplifier
  bit selected = 1'b0;
  always @(negedge amp_cs) begin
    sr       <= gain_word;
    selected <= 1'b1;
  end
  always @(posedge spi_sck) if (!amp_cs) sr <= {sr[6:0], spi_mosi};
  always @(posedge amp_cs) if (selected) begin
    gain_word   <= sr;
    gain_writes <= gain_writes + 1;
    selected    <= 1'b0;
  end
  assign amp_dout = sr[7];

  // converter
  always @(posedge ad_conv) begin
    logic signed [13:0] a, b;
    a = adc_code(gain_of(gain_word[3:0]) * vin_now());
    b = adc_code(gain_of(gain_word[7:4]) * vin_now());
    last_a      <= a;
    last_b      <= b;
    frame       <= {2'b00, a, 2'b00, b, 2'b00};
    nfall       <= 0;
    conversions <= conversions + 1;
  end
  always @(negedge spi_sck) if (nfall < 34) nfall <= nfall + 1;
  assign spi_miso = (nfall < 34) ? frame[33 - nfall] : 1'b0;

  wire unused_ok = amp_shdn;

endmodule
