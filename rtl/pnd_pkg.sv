// pnd_pkg: constants and types shared by the piano note detector.
//
// The numbers that set the measurement come straight from the design's
// description: a 5 MHz system clock, one ADC conversion every 73 clocks, one
// stored sample for every 16 conversions (fs = 5e6/(73*16) ~ 4.28 kHz) and a
// 512-point transform on 14-bit samples (bin width fs/512 ~ 8.36 Hz).
// The controller state codes 0, 3, 5 and 7 are the values seen on the
// "Current State" probe of the logic-analyser capture of one FFT run (load,
// compute, unload, idle); codes 1 and 2 are this design's own.
package pnd_pkg;

  parameter int unsigned SYS_CLK_HZ     = 5_000_000; // system clock
  parameter int unsigned ADC_SPACING    = 73;        // clocks per ADC conversion
  parameter int unsigned DECIMATION     = 16;        // keep one conversion in 16
  parameter int unsigned NFFT           = 512;       // transform length
  parameter int unsigned ADC_W          = 14;        // LTC1407A sample width
  parameter int unsigned XK_W           = 14;        // FFT output width (scaled)
  parameter int unsigned IDX_W          = $clog2(NFFT); // 9-bit bin index
  parameter int unsigned SCALE_W        = 10;        // 2 bits per stage, 5 stages for N=512
  parameter int unsigned FREQ_W         = 13;        // Hz, up to 8191

  // Main controller states. 0/3/5/7 follow the captured encoding.
  typedef enum logic [2:0] {
    ST_IDLE    = 3'd0,  // wait for a capture request
    ST_CONFIG  = 3'd1,  // write transform direction and scaling once after reset
    ST_CAPTURE = 3'd2,  // sample memory filling from the ADC
    ST_LOAD    = 3'd3,  // start held, samples fed while rfd is high
    ST_COMPUTE = 3'd5,  // core busy; unload requested on edone
    ST_UNLOAD  = 3'd7   // dv high, results streamed to the peak detector
  } ctrl_state_e;

  // Fixed-point Hz-per-bin factor: round(2^FRAC * clk / (spacing*down*N)).
  function automatic longint unsigned hz_per_bin_q(input int unsigned clk_hz,
                                                   input int unsigned spacing,
                                                   input int unsigned down,
                                                   input int unsigned n,
                                                   input int unsigned frac);
    longint unsigned num, den;
    num = longint'(clk_hz) << frac;
    den = longint'(spacing) * longint'(down) * longint'(n);
    return (num + den / 2) / den;
  endfunction

endpackage
