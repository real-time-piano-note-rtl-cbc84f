// fft_controller: the main state machine of the note detector.
//
// It sequences one measurement through the capture buffer and the burst-mode
// FFT core (Radix-4 Burst I/O handshake: start / rfd / xn_index to load,
// busy / edone / done while computing, unload / dv / xk_index to read out).
//
//   CONFIG  (1) after reset: pulse fwd_inv_we and scale_sch_we once, with
//               fwd_inv = 1 (forward) and the SCALE_SCH schedule
//   IDLE    (0) wait for `capture_req` (debounced sampling button)
//   CAPTURE (2) pulse mem_capture, wait until the sample memory is full
//   LOAD    (3) hold `start`; while rfd is high, feed sample fft_index and
//               advance fft_index; leave when rfd falls after the frame
//   COMPUTE (5) core busy; on `edone` pulse `unload` for one clock;
//               leave when dv rises
//   UNLOAD  (7) results stream into the peak detector; when it reports
//               `peak_done`, pulse `result_valid` and return to IDLE
//
// Samples are only presented while rfd is high, and fft_index is the
// memory read address, so input sample k is on xn_re in the cycle the core
// shows xn_index = k (checked by an assertion). Requests arriving outside
// IDLE are ignored.
//
// The state codes 3 -> 5 -> 7 -> 0 and the signal names fft_index, start,
// rfd, busy, dv and unload are those of a logic-analyser capture of the
// original design; a single FSM feeding samples only while rfd is high and
// unloading in natural order is from its description. States 1 and 2, the
// unload-on-edone policy and the zero-latency address/data alignment are
// this design's choices.
module fft_controller
  import pnd_pkg::*;
#(
  parameter int unsigned         N         = pnd_pkg::NFFT,
  parameter logic [SCALE_W-1:0]  SCALE_SCH = 10'b01_10_10_10_10
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 capture_req,
  // sample memory
  output logic                 mem_capture,
  input  logic                 mem_full,
  output logic [$clog2(N)-1:0] fft_index,
  // FFT core control
  output logic                 fft_start,
  output logic                 fft_unload,
  output logic                 fft_fwd_inv,
  output logic                 fft_fwd_inv_we,
  output logic [SCALE_W-1:0]   fft_scale_sch,
  output logic                 fft_scale_sch_we,
  input  logic                 fft_rfd,
  input  logic                 fft_busy,
  input  logic                 fft_edone,
  input  logic                 fft_dv,
  input  logic [$clog2(N)-1:0] fft_xn_index,
  // peak detector
  input  logic                 peak_done,
  output logic                 result_valid,
  output ctrl_state_e          state
);

  localparam int unsigned IW = $clog2(N);

  logic seen_rfd_q;

  assign fft_start     = (state == ST_LOAD);
  assign fft_fwd_inv   = 1'b1;
  assign fft_scale_sch = SCALE_SCH;

  always_ff @(posedge clk) begin
    if (rst) begin
      state            <= ST_CONFIG;
      fft_index        <= '0;
      seen_rfd_q       <= 1'b0;
      mem_capture      <= 1'b0;
      fft_unload       <= 1'b0;
      fft_fwd_inv_we   <= 1'b0;
      fft_scale_sch_we <= 1'b0;
      result_valid     <= 1'b0;
    end else begin
      mem_capture      <= 1'b0;
      fft_unload       <= 1'b0;
      fft_fwd_inv_we   <= 1'b0;
      fft_scale_sch_we <= 1'b0;
      result_valid     <= 1'b0;
      unique case (state)
        ST_CONFIG: begin
          fft_fwd_inv_we   <= 1'b1;
          fft_scale_sch_we <= 1'b1;
          state            <= ST_IDLE;
        end
        ST_IDLE: if (capture_req) begin
          mem_capture <= 1'b1;
          state       <= ST_CAPTURE;
        end
        ST_CAPTURE: if (mem_full && !mem_capture) begin
          fft_index  <= '0;
          seen_rfd_q <= 1'b0;
          state      <= ST_LOAD;
        end
        ST_LOAD: begin
          if (fft_rfd) begin
            seen_rfd_q <= 1'b1;
            fft_index  <= fft_index + 1'b1;
          end else if (seen_rfd_q) begin
            state <= ST_COMPUTE;
          end
        end
        ST_COMPUTE: begin
          if (fft_edone) fft_unload <= 1'b1;
          if (fft_dv)    state      <= ST_UNLOAD;
        end
        ST_UNLOAD: if (peak_done) begin
          result_valid <= 1'b1;
          state        <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // Burst-load rule: the sample on the bus must be the one the core indexes.
  always_ff @(posedge clk) begin
    if (!rst && state == ST_LOAD && fft_rfd)
      assert (fft_index == fft_xn_index)
        else $error("fft_controller: fft_index %0d != xn_index %0d", fft_index, fft_xn_index);
  end

  // fft_busy is part of the core handshake and is watched by the assertion
  // below: the core must not compute while samples are still being loaded.
  always_ff @(posedge clk) begin
    if (!rst && fft_rfd) assert (!fft_busy)
      else $error("fft_controller: core busy while ready for data");
  end

  if (IW < 2) begin : g_bad_n
    $error("fft_controller: N too small");
  end

endmodule
