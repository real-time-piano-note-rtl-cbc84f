// spi_master: owner of the SPI bus shared by the preamplifier and the ADC.
//
// On the target board the LTC6912 amplifier and the LTC1407A converter hang
// on the same sck/mosi lines, so only one of them may be addressed at a time.
// This block contains both engines (preamp_spi and adc_master) and arbitrates:
// a gain request (`gain_load`, normally a debounced one-shot) is held pending,
// the ADC is told to stop after its current frame, the gain word is written,
// and conversions resume by themselves while `adc_run` is high. While
// `gain_hold` is high a request stays pending and the ADC keeps converting;
// the top holds requests during a capture so that the stored samples stay
// evenly spaced. `gain_wait` is high while a request is pending.
// Outputs to the pins are multiplexed from whichever engine is active; both
// engines idle with sck low, so switching never creates a false edge.
//
// The design description calls this a single custom SPI master that controls
// both the pre-amplifier gain and the ADC trigger; the pending-request
// arbitration is this design's own.
module spi_master
  import pnd_pkg::*;
#(
  parameter int unsigned SAMPLE_SPACING = pnd_pkg::ADC_SPACING,
  parameter int unsigned AMP_HALF_PERIOD = 2
) (
  input  logic                    clk,
  input  logic                    rst,
  // control
  input  logic                    adc_run,      // keep converting
  input  logic                    gain_load,    // one-cycle gain write request
  input  logic                    gain_hold,    // 1: keep a request pending (capture running)
  input  logic [3:0]              gain_a,
  input  logic [3:0]              gain_b,
  output logic                    gain_wait,
  output logic                    gain_busy,
  output logic                    gain_done,
  output logic [7:0]              gain_prev,
  // samples
  output logic signed [ADC_W-1:0] sample_a,
  output logic                    sample_valid,
  // pins
  output logic                    spi_sck,
  output logic                    spi_mosi,
  input  logic                    spi_miso,
  output logic                    amp_cs,       // active low
  output logic                    amp_shdn,     // active high shutdown
  input  logic                    amp_dout,
  output logic                    ad_conv
);

  logic pending_q;
  logic amp_load, amp_busy, amp_sck;
  logic adc_busy, adc_sck, adc_en;
  logic signed [ADC_W-1:0] sample_b_unused;

  // Request is launched only when allowed, the ADC is idle and no write is
  // running; the ADC is stopped only for a request that may go ahead.
  assign amp_load  = pending_q && !gain_hold && !adc_busy && !amp_busy;
  assign adc_en    = adc_run && !(pending_q && !gain_hold) && !amp_busy;
  assign gain_wait = pending_q;
  assign gain_busy = amp_busy;
  assign amp_shdn  = 1'b0;

  always_ff @(posedge clk) begin
    if (rst)            pending_q <= 1'b0;
    else if (gain_load) pending_q <= 1'b1;
    else if (amp_load)  pending_q <= 1'b0;
  end

  preamp_spi #(.HALF_PERIOD(AMP_HALF_PERIOD)) u_preamp (
    .clk, .rst,
    .load     (amp_load),
    .gain_a, .gain_b,
    .busy     (amp_busy),
    .done     (gain_done),
    .spi_sck  (amp_sck),
    .spi_mosi (spi_mosi),
    .amp_cs,
    .amp_dout,
    .prev_word(gain_prev)
  );

  adc_master #(.SAMPLE_SPACING(SAMPLE_SPACING)) u_adc (
    .clk, .rst,
    .enable       (adc_en),
    .busy         (adc_busy),
    .ad_conv,
    .spi_sck      (adc_sck),
    .spi_miso,
    .sample_a,
    .sample_b     (sample_b_unused),
    .sample_valid
  );

  assign spi_sck = adc_sck | amp_sck;

  // The two engines must never drive the bus together.
  always_ff @(posedge clk) begin
    if (!rst) assert (!(adc_busy && amp_busy))
      else $error("spi_master: ADC frame and gain write overlap");
  end

endmodule
