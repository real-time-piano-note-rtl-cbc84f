// piano_note_detector: top level of the FFT-based piano note detector.
//
// Signal path (one measurement per press of the sampling button):
//   analog in -> LTC6912 preamp -> LTC1407A ADC --SPI--> spi_master
//   -> sample_memory (every 16th conversion, 512 words)
//   -> external FFT core (512-point, Radix-4 Burst I/O, 14-bit data)
//   -> peak_detector (largest |X[k]|^2) -> bin_to_hz -> lcd_controller
// with fft_controller sequencing capture, load, compute and unload.
//
// The ADC converts continuously, one frame every SAMPLE_SPACING (73) clocks
// of the 5 MHz clock; a debounced press of btn_sample makes the sample
// memory keep every DOWNSAMPLE-th (16th) conversion until 512 are stored,
// i.e. fs = 5e6/1168 ~ 4.28 kHz and ~8.36 Hz per bin. The buffer is then
// fed to the FFT core while it is ready for data, the transform is
// unloaded in natural order into the peak detector, and the winning bin and
// its frequency are written to the LCD. A debounced press of btn_gain writes
// {gain_b, gain_a} into the preamplifier between two ADC frames; a press
// during a capture is held until the capture ends, so the samples of one
// capture are evenly spaced and all taken at one gain.
//
// The FFT core is vendor IP and is not part of this RTL: its ports are the
// fft_* ports of this module (xn_im is held at 0, the input is real).
// Latency of one measurement at the default sizes: 512 x 16 x 73 = 598 016
// clocks of capture (~120 ms), 512 clocks of load, the core's compute and
// unload times, then two clocks to the LCD start and ~1.4 ms of LCD writes.
//
// The chain of blocks, the sizes and the rates are from the design
// description; the board pin set (shared SPI bus, 4-bit LCD bus) follows
// the Spartan-3E starter board it was built on. The exposed debug outputs
// are this design's own.
module piano_note_detector
  import pnd_pkg::*;
#(
  parameter int unsigned        DEBOUNCE_CYCLES = 50_000,
  parameter int unsigned        SAMPLE_SPACING  = pnd_pkg::ADC_SPACING,
  parameter int unsigned        DOWNSAMPLE      = pnd_pkg::DECIMATION,
  parameter int unsigned        LCD_POWER_ON_US = 15_000,
  parameter logic [SCALE_W-1:0] SCALE_SCH       = 10'b01_10_10_10_10
) (
  input  logic                    clk,            // 5 MHz
  input  logic                    rst,            // synchronous, active high
  input  logic                    btn_sample,     // start a measurement
  input  logic                    btn_gain,       // write the preamp gain
  input  logic [3:0]              gain_a,
  input  logic [3:0]              gain_b,
  // shared SPI bus: preamplifier and ADC
  output logic                    spi_sck,
  output logic                    spi_mosi,
  input  logic                    spi_miso,
  output logic                    amp_cs,
  output logic                    amp_shdn,
  input  logic                    amp_dout,
  output logic                    ad_conv,
  // FFT core (512-point, Radix-4 Burst I/O)
  output logic                    fft_start,
  output logic                    fft_unload,
  output logic signed [ADC_W-1:0] fft_xn_re,
  output logic signed [ADC_W-1:0] fft_xn_im,
  output logic                    fft_fwd_inv,
  output logic                    fft_fwd_inv_we,
  output logic [SCALE_W-1:0]      fft_scale_sch,
  output logic                    fft_scale_sch_we,
  input  logic                    fft_rfd,
  input  logic                    fft_busy,
  input  logic                    fft_edone,
  input  logic                    fft_done,
  input  logic                    fft_dv,
  input  logic [IDX_W-1:0]        fft_xn_index,
  input  logic [IDX_W-1:0]        fft_xk_index,
  input  logic signed [XK_W-1:0]  fft_xk_re,
  input  logic signed [XK_W-1:0]  fft_xk_im,
  // character LCD
  output logic                    lcd_e,
  output logic                    lcd_rs,
  output logic                    lcd_rw,
  output logic [3:0]              lcd_d,
  // status
  output logic [IDX_W-1:0]        peak_bin,
  output logic [2*XK_W:0]         peak_mag,
  output logic                    capturing,      // sample memory filling
  output logic                    gain_pending,   // gain write waiting or running
  output logic [7:0]              gain_readback,  // preamp word before the last write
  output logic [FREQ_W-1:0]       freq_hz,
  output logic                    result_valid,
  output logic                    lcd_ready,
  output ctrl_state_e             state
);

  logic sample_req, gain_req;
  logic sample_lvl, gain_lvl;
  logic gain_wait, gain_busy, gain_done;
  logic [7:0] gain_prev;
  logic signed [ADC_W-1:0] adc_sample;
  logic adc_valid;
  logic mem_capture, mem_filling, mem_full, mem_stored;
  logic [IDX_W-1:0] fft_index;
  logic peak_update, peak_done;
  logic lcd_start;

  assign capturing     = mem_filling;
  assign gain_pending  = gain_wait | gain_busy;
  assign gain_readback = gain_prev;

  debounce_oneshot #(.DEBOUNCE_CYCLES(DEBOUNCE_CYCLES)) u_db_sample (
    .clk, .rst, .btn(btn_sample), .level(sample_lvl), .pulse(sample_req)
  );

  debounce_oneshot #(.DEBOUNCE_CYCLES(DEBOUNCE_CYCLES)) u_db_gain (
    .clk, .rst, .btn(btn_gain), .level(gain_lvl), .pulse(gain_req)
  );

  spi_master #(.SAMPLE_SPACING(SAMPLE_SPACING)) u_spi (
    .clk, .rst,
    .adc_run      (1'b1),
    .gain_load    (gain_req),
    .gain_hold    (mem_filling),
    .gain_a, .gain_b,
    .gain_wait, .gain_busy, .gain_done, .gain_prev,
    .sample_a     (adc_sample),
    .sample_valid (adc_valid),
    .spi_sck, .spi_mosi, .spi_miso,
    .amp_cs, .amp_shdn, .amp_dout, .ad_conv
  );

  sample_memory #(.DEPTH(NFFT), .DOWNSAMPLE(DOWNSAMPLE), .W(ADC_W)) u_mem (
    .clk, .rst,
    .capture  (mem_capture),
    .in_data  (adc_sample),
    .in_valid (adc_valid),
    .filling  (mem_filling),
    .full     (mem_full),
    .stored   (mem_stored),
    .rd_addr  (fft_index),
    .rd_data  (fft_xn_re)
  );

  assign fft_xn_im = '0;

  fft_controller #(.N(NFFT), .SCALE_SCH(SCALE_SCH)) u_ctrl (
    .clk, .rst,
    .capture_req      (sample_req),
    .mem_capture,
    .mem_full,
    .fft_index,
    .fft_start, .fft_unload,
    .fft_fwd_inv, .fft_fwd_inv_we,
    .fft_scale_sch, .fft_scale_sch_we,
    .fft_rfd, .fft_busy, .fft_edone,
    .fft_dv, .fft_xn_index,
    .peak_done,
    .result_valid,
    .state
  );

  peak_detector #(.N(NFFT), .W(XK_W)) u_peak (
    .clk, .rst,
    .dv       (fft_dv),
    .xk_index (fft_xk_index),
    .xk_re    (fft_xk_re),
    .xk_im    (fft_xk_im),
    .peak_idx (peak_bin),
    .peak_mag,
    .update   (peak_update),
    .done     (peak_done)
  );

  bin_to_hz #(.N(NFFT), .SAMPLE_SPACING(SAMPLE_SPACING), .DOWNSAMPLE(DOWNSAMPLE)) u_hz (
    .clk, .rst,
    .in_valid  (result_valid),
    .bin_idx   (peak_bin),
    .out_valid (lcd_start),
    .freq_hz
  );

  lcd_controller #(.POWER_ON_US(LCD_POWER_ON_US)) u_lcd (
    .clk, .rst,
    .lcd_start,
    .freq_hz,
    .bin_idx (peak_bin),
    .ready   (lcd_ready),
    .lcd_e, .lcd_rs, .lcd_rw, .lcd_d
  );

  // done follows edone by one clock in the core's handshake.
  always_ff @(posedge clk) begin
    if (!rst && fft_done) assert (!fft_busy)
      else $error("piano_note_detector: FFT done while busy");
  end

endmodule
