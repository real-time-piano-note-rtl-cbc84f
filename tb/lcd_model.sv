// lcd_model: behavioural model of a 16x2 HD44780-style LCD on a 4-bit bus
// (not synthesizable).
//
// Latches lcd_d on each falling edge of lcd_e that follows a rising edge. The first four nibbles are
// taken as 8-bit-mode instructions (wake-up 3, 3, 3 and the switch to 4-bit
// mode, 2); after that nibbles pair up, high first, into instructions (rs 0)
// or characters (rs 1). Clear, set-DDRAM-address and character writes are
// executed into `ddram`. The model also checks the bus timing the panel
// needs and counts each violation in `timing_errors`: E high >= 230 ns,
// >= 40 us from one byte to the next (>= 1.64 ms after clear, >= 4.1 ms
// after the first wake-up nibble), and >= 15 ms from time 0 to the first.
`timescale 1ns/1ps
module lcd_model (
  input logic       lcd_e,
  input logic       lcd_rs,
  input logic       lcd_rw,
  input logic [3:0] lcd_d
);

  logic [7:0] ddram [128];
  logic [6:0] addr = '0;
  int   nibbles = 0;
  bit   have_hi = 1'b0;
  logic [3:0] hi = '0;
  int   timing_errors = 0;
  int   chars_written = 0;
  int   clears = 0;
  int   instr = 0;
  realtime t_rise = 0, t_last = 0, need = 15_000_000.0;

  initial for (int i = 0; i < 128; i++) ddram[i] = 8'h20;

  function automatic string line(input int n);
    string s;
    s = "";
    for (int i = 0; i < 16; i++) s = {s, string'(ddram[(n == 0 ? 0 : 64) + i])};
    return s;
  endfunction

  bit armed = 1'b0;   // a rising edge of E has been seen
  always @(posedge lcd_e) begin
    t_rise = $realtime;
    armed  = 1'b1;
  end

  always @(negedge lcd_e) if (armed) begin
    logic [7:0] b;
    if ($realtime - t_rise < 230.0) timing_errors++;
    if (lcd_rw) timing_errors++;
    nibbles++;
    if (nibbles <= 4) begin
      if ($realtime - t_last < need) timing_errors++;
      t_last = $realtime;
      need = (nibbles == 1) ? 4_100_000.0 : (nibbles == 2) ? 100_000.0 : 40_000.0;
    end else if (!have_hi) begin
      if ($realtime - t_last < need) timing_errors++;
      hi = lcd_d;
      have_hi = 1'b1;
    end else begin
      have_hi = 1'b0;
      b = {hi, lcd_d};
      t_last = $realtime;
      need = 40_000.0;
      if (lcd_rs) begin
        ddram[addr] = b;
        addr = addr + 1'b1;
        chars_written++;
      end else begin
        instr++;
        if (b == 8'h01) begin
          for (int i = 0; i < 128; i++) ddram[i] = 8'h20;
          addr = '0;
          clears++;
          need = 1_640_000.0;
        end else if (b[7]) begin
          addr = b[6:0];
        end
      end
    end
  end

endmodule
