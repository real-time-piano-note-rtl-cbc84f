// adc_master: conversion engine for the LTC1407A dual 14-bit ADC.
//
// While `enable` is high the engine runs one conversion frame every
// SAMPLE_SPACING clocks (73 by default, which with the 5 MHz clock and the
// 1-in-16 decimation in the sample memory gives fs = 5e6/(73*16) ~ 4.28 kHz).
// A frame, counted by t from 0:
//   t = 0      ad_conv is raised for one clock; the ADC samples both inputs
//   t = 2..69  34 sck periods of 2 clocks (sck = clk/2); miso is sampled at
//              every clock that raises sck, i.e. 34 bits MSB first:
//              2 idle bits, 14 bits channel A, 2 idle, 14 bits channel B, 2 idle
//   t = 70     sample_a / sample_b are updated and sample_valid pulses
//   t = 71..   idle until the next frame
// If `enable` drops, the current frame is completed and the engine stops;
// `busy` is high during a frame so the shared SPI bus can be handed over.
// Outputs are two's complement, as delivered by the converter (0 = 1.65 V).
//
// The 73-clock spacing and the use of channel A only are from the design
// description; the frame layout is the LTC1407A serial format as used on the
// Spartan-3E starter board, and the placement of the idle clocks is this
// design's choice.
module adc_master
  import pnd_pkg::*;
#(
  parameter int unsigned SAMPLE_SPACING = pnd_pkg::ADC_SPACING
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    enable,
  output logic                    busy,
  output logic                    ad_conv,
  output logic                    spi_sck,
  input  logic                    spi_miso,
  output logic signed [ADC_W-1:0] sample_a,
  output logic signed [ADC_W-1:0] sample_b,
  output logic                    sample_valid
);

  localparam int unsigned FRAME_END = 70;   // clock at which the word is complete
  localparam int unsigned TW = $clog2(SAMPLE_SPACING);

  if (SAMPLE_SPACING < FRAME_END + 2) begin : g_bad_spacing
    $error("adc_master: SAMPLE_SPACING must be at least %0d", FRAME_END + 2);
  end

  logic          active_q;
  logic [TW-1:0] t_q;
  logic [31:0]   rx_q;       // the two leading idle bits fall off the top

  assign busy = active_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      active_q     <= 1'b0;
      t_q          <= '0;
      rx_q         <= '0;
      ad_conv      <= 1'b0;
      spi_sck      <= 1'b0;
      sample_a     <= '0;
      sample_b     <= '0;
      sample_valid <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      if (!active_q) begin
        if (enable) begin
          active_q <= 1'b1;
          t_q      <= '0;
        end
      end else begin
        ad_conv <= (t_q == '0);
        if (t_q >= TW'(2) && t_q < TW'(FRAME_END)) begin
          spi_sck <= t_q[0];         // raised on odd t: t = 3, 5, ..., 69
          if (t_q[0]) rx_q <= {rx_q[30:0], spi_miso};
        end else begin
          spi_sck <= 1'b0;
        end
        if (t_q == TW'(FRAME_END)) begin
          sample_a     <= rx_q[31:18];
          sample_b     <= rx_q[15:2];
          sample_valid <= 1'b1;
        end
        if (t_q == TW'(SAMPLE_SPACING - 1)) begin
          t_q      <= '0;
          active_q <= enable;
        end else begin
          t_q <= t_q + 1'b1;
        end
      end
    end
  end

endmodule
