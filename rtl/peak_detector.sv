// peak_detector: finds the strongest FFT bin of a frame.
//
// For every output sample (dv high) the squared magnitude
// xk_re^2 + xk_im^2 is formed in a first register stage; a second stage
// compares it with the largest value kept so far and, if strictly larger,
// stores the value and its bin index. The square root is never taken: the
// ordering of squared magnitudes is the ordering of magnitudes. The frame
// starts at xk_index 0, which clears the kept value; after the bin with
// index N-1 the result is final and `done` pulses for one clock (two clocks
// after that bin was on the bus). `update` pulses each time a new maximum is
// stored.
//
// Only bins MIN_BIN..MAX_BIN compete. For a real input the upper half of
// the spectrum mirrors the lower half, and bin 0 holds the residual DC
// offset of the input, so the defaults search bins 1..N/2-1.
//
// The squared-magnitude compare-and-keep scheme is from the design
// description; the search range, the strict '>' (the lower bin wins a tie)
// and the two-stage pipeline are this design's choices.
module peak_detector
  import pnd_pkg::*;
#(
  parameter int unsigned N       = pnd_pkg::NFFT,
  parameter int unsigned W       = pnd_pkg::XK_W,
  parameter int unsigned MIN_BIN = 1,
  parameter int unsigned MAX_BIN = N / 2 - 1
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      dv,
  input  logic [$clog2(N)-1:0]      xk_index,
  input  logic signed [W-1:0]       xk_re,
  input  logic signed [W-1:0]       xk_im,
  output logic [$clog2(N)-1:0]      peak_idx,
  output logic [2*W:0]              peak_mag,
  output logic                      update,
  output logic                      done
);

  localparam int unsigned IW = $clog2(N);
  localparam int unsigned MW = 2 * W + 1;

  logic          v1_q, first1_q, last1_q, inr1_q;
  logic [IW-1:0] idx1_q;
  logic [MW-1:0] mag1_q;
  logic [MW-1:0] base_mag;
  logic          take;
  logic signed [2*W-1:0] sq_re, sq_im;

  assign sq_re = xk_re * xk_re;
  assign sq_im = xk_im * xk_im;

  always_ff @(posedge clk) begin
    if (rst) begin
      v1_q     <= 1'b0;
      first1_q <= 1'b0;
      last1_q  <= 1'b0;
      inr1_q   <= 1'b0;
      idx1_q   <= '0;
      mag1_q   <= '0;
    end else begin
      v1_q     <= dv;
      first1_q <= (xk_index == '0);
      last1_q  <= (xk_index == IW'(N - 1));
      inr1_q   <= (xk_index >= IW'(MIN_BIN)) && (xk_index <= IW'(MAX_BIN));
      idx1_q   <= xk_index;
      mag1_q   <= MW'(unsigned'(sq_re)) + MW'(unsigned'(sq_im));
    end
  end

  assign base_mag = first1_q ? '0 : peak_mag;
  assign take     = v1_q && inr1_q && (mag1_q > base_mag);

  always_ff @(posedge clk) begin
    if (rst) begin
      peak_idx <= IW'(MIN_BIN);
      peak_mag <= '0;
      update   <= 1'b0;
      done     <= 1'b0;
    end else begin
      update <= take;
      done   <= v1_q && last1_q;
      if (take) begin
        peak_mag <= mag1_q;
        peak_idx <= idx1_q;
      end else if (v1_q && first1_q) begin
        peak_mag <= '0;
        peak_idx <= IW'(MIN_BIN);
      end
    end
  end

endmodule
