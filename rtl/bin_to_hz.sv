// bin_to_hz: converts an FFT bin index into a frequency in hertz.
//
// The frequency of bin k is k * fs / N with fs = CLK_HZ / (SAMPLE_SPACING *
// DOWNSAMPLE). With the default numbers, fs = 5e6/1168 ~ 4280.8 Hz and one
// bin is ~8.361 Hz. The division is done at elaboration time: the factor
// fs/N is held as an unsigned fixed-point constant with FRAC fraction bits,
// and the hardware is one constant multiplication followed by round-to-
// nearest (add half, shift right). With FRAC = 16 the rounding error is
// below 0.005 Hz over all 512 bins. The result is registered: freq_hz and
// out_valid follow in_valid by one clock.
//
// Scaling the bin by the known sampling rate and transform size is from the
// design description; the fixed-point method and integer-Hz output are this
// design's choices.
module bin_to_hz
  import pnd_pkg::*;
#(
  parameter int unsigned N              = pnd_pkg::NFFT,
  parameter int unsigned CLK_HZ         = pnd_pkg::SYS_CLK_HZ,
  parameter int unsigned SAMPLE_SPACING = pnd_pkg::ADC_SPACING,
  parameter int unsigned DOWNSAMPLE     = pnd_pkg::DECIMATION,
  parameter int unsigned FRAC           = 16,
  parameter int unsigned OUT_W          = pnd_pkg::FREQ_W
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic [$clog2(N)-1:0] bin_idx,
  output logic                 out_valid,
  output logic [OUT_W-1:0]     freq_hz
);

  localparam longint unsigned K  = hz_per_bin_q(CLK_HZ, SAMPLE_SPACING, DOWNSAMPLE, N, FRAC);
  localparam int unsigned     KW = $clog2(K + 1);
  localparam int unsigned     PW = KW + $clog2(N) + 1;

  logic [PW-1:0] prod;

  assign prod = PW'(bin_idx) * PW'(K) + PW'(64'd1 << (FRAC - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      freq_hz   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) freq_hz <= OUT_W'(prod >> FRAC);
    end
  end

endmodule
