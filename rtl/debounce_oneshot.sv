// debounce_oneshot: clean single-cycle trigger from a mechanical pushbutton.
//
// The button is first brought into the clock domain with a two-flop
// synchroniser. A counter then requires the synchronised level to stay
// different from the accepted level for DEBOUNCE_CYCLES consecutive clocks
// before the accepted level changes; any bounce restarts the count. A press
// (accepted level going 0 -> 1) produces `pulse` high for exactly one clock,
// and `level` reports the accepted (debounced) state.
//
// Timing: pulse is high in the clock edge DEBOUNCE_CYCLES + 3 clocks after the
// first clock that sees a clean press (2 synchroniser, N counter, 1 output).
// The design description says only that the preamplifier command and the
// capture trigger go through "debounced one-shot" triggers; the synchroniser,
// the counter scheme and the 10 ms default (50 000 clocks at 5 MHz) are this
// design's own choices.
module debounce_oneshot #(
  parameter int unsigned DEBOUNCE_CYCLES = 50_000
) (
  input  logic clk,
  input  logic rst,      // synchronous, active high
  input  logic btn,      // raw pushbutton, active high
  output logic level,    // debounced button level
  output logic pulse     // one clock per press
);

  localparam int unsigned CW = $clog2(DEBOUNCE_CYCLES + 1);

  logic [1:0]    sync_q;
  logic [CW-1:0] cnt_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync_q <= '0;
      cnt_q  <= '0;
      level  <= 1'b0;
      pulse  <= 1'b0;
    end else begin
      sync_q <= {sync_q[0], btn};
      pulse  <= 1'b0;
      if (sync_q[1] == level) begin
        cnt_q <= '0;
      end else if (cnt_q == CW'(DEBOUNCE_CYCLES - 1)) begin
        cnt_q <= '0;
        level <= sync_q[1];
        pulse <= sync_q[1];
      end else begin
        cnt_q <= cnt_q + 1'b1;
      end
    end
  end

endmodule
