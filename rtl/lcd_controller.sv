// lcd_controller: drives a 16x2 HD44780-compatible character LCD in 4-bit mode.
//
// A separate state machine from the main controller. After reset it waits
// for the panel's power-on time, sends the 4-bit wake-up sequence (nibbles
// 3, 3, 3, 2) and the configuration bytes 0x28 (4-bit, 2 lines), 0x06
// (entry mode, increment), 0x0C (display on, no cursor) and 0x01 (clear).
// It then waits for `lcd_start`. On each start (one remembered if it arrives
// while the panel is still being written) it latches `freq_hz` and `bin_idx`
// and rewrites the whole display:
//     line 1  "Freq:  dddd Hz  "   frequency in Hz, leading zeros blanked
//     line 2  "Bin:    ddd     "   FFT bin index
// Numbers are turned into decimal digits by a double-dabble (shift and add 3)
// conversion inside the latching clock.
//
// Every byte goes out as two nibbles, high first. One nibble takes: one clock
// of rs/data set-up with E low, E high for E_CYC clocks (>= 230 ns), one
// clock of hold with E low; 1 us separates the two nibbles of a byte. After
// each byte the controller waits 40 us (1.64 ms after clear, 4.1 ms / 100 us
// after the first two wake-up nibbles), as the panel needs. lcd_rw is tied
// low: the busy flag is never read, the fixed delays stand in for it.
// `ready` is high when the panel is initialised and idle.
//
// From the design description: 16x2 panel, 4-bit mode, a separate FSM
// started by lcd_start, characters derived from the 9-bit FFT index, and
// explicit delay states between commands (its fix for flickering). The
// command set, the delay values (HD44780 data sheet) and the screen layout
// are this design's choices.
module lcd_controller
  import pnd_pkg::*;
#(
  parameter int unsigned CLK_HZ      = pnd_pkg::SYS_CLK_HZ,
  parameter int unsigned POWER_ON_US = 15_000
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                lcd_start,
  input  logic [FREQ_W-1:0]   freq_hz,
  input  logic [IDX_W-1:0]    bin_idx,
  output logic                ready,
  output logic                lcd_e,
  output logic                lcd_rs,
  output logic                lcd_rw,
  output logic [3:0]          lcd_d
);

  // clocks for a delay in ns, rounded up, at least 1
  function automatic int unsigned ns2cyc(input longint unsigned ns);
    longint unsigned c;
    c = (ns * longint'(CLK_HZ) + 64'd999_999_999) / 64'd1_000_000_000;
    return (c == 0) ? 1 : int'(c);
  endfunction

  localparam int unsigned E_CYC     = ns2cyc(230);
  localparam int unsigned NIB_GAP   = ns2cyc(1_000);
  localparam int unsigned WAIT_PWR  = ns2cyc(longint'(POWER_ON_US) * 1000);
  localparam int unsigned WAIT_4100 = ns2cyc(4_100_000);
  localparam int unsigned WAIT_1640 = ns2cyc(1_640_000);
  localparam int unsigned WAIT_100  = ns2cyc(100_000);
  localparam int unsigned WAIT_40   = ns2cyc(40_000);
  localparam int unsigned CW        = $clog2(WAIT_PWR + 1);

  localparam int unsigned PC_IDLE = 8;   // first op of a display update
  localparam int unsigned PC_LAST = 41;  // last op of a display update

  typedef enum logic [1:0] {W_LONG, W_100, W_40, W_1640} wait_e;

  typedef struct packed {
    logic       nib_only;  // wake-up nibble: only data[3:0] is sent
    logic       rs;        // 0 command, 1 character
    logic [7:0] data;
    wait_e      wait_sel;  // delay after the op
  } lcd_op_t;

  typedef enum logic [2:0] {L_WAIT, L_SETUP, L_EHIGH, L_HOLD, L_IDLE} lstate_e;

  lstate_e       st_q;
  logic [5:0]    pc_q;
  logic [CW-1:0] cnt_q;
  logic          second_q;       // sending the low nibble of a byte
  logic          pending_q;
  logic [3:0]    fdig_q [4];     // frequency digits, [3] = thousands
  logic [3:0]    bdig_q [3];     // bin digits, [2] = hundreds
  lcd_op_t       op;

  // binary to BCD by shift-and-add-3
  function automatic logic [15:0] to_bcd(input logic [12:0] v);
    logic [28:0] s;
    s = {16'd0, v};
    for (int i = 0; i < 13; i++) begin
      for (int d = 0; d < 4; d++)
        if (s[13 + 4*d +: 4] >= 4'd5) s[13 + 4*d +: 4] = s[13 + 4*d +: 4] + 4'd3;
      s = s << 1;
    end
    return s[28:13];
  endfunction

  function automatic logic [7:0] digit_char(input logic [3:0] d, input logic blank);
    return blank ? 8'h20 : (8'h30 + 8'(d));
  endfunction

  // The op list. Text characters are positions 9..24 and 26..41.
  function automatic lcd_op_t op_at(input logic [5:0] pc);
    lcd_op_t o;
    logic fb3, fb2, fb1, bb2, bb1;
    fb3 = (fdig_q[3] == 0);
    fb2 = fb3 && (fdig_q[2] == 0);
    fb1 = fb2 && (fdig_q[1] == 0);
    bb2 = (bdig_q[2] == 0);
    bb1 = bb2 && (bdig_q[1] == 0);
    o = '{nib_only: 1'b0, rs: 1'b1, data: 8'h20, wait_sel: W_40};
    unique case (pc)
      6'd0:  o = '{1'b1, 1'b0, 8'h03, W_LONG};   // wake-up, 4.1 ms
      6'd1:  o = '{1'b1, 1'b0, 8'h03, W_100};
      6'd2:  o = '{1'b1, 1'b0, 8'h03, W_40};
      6'd3:  o = '{1'b1, 1'b0, 8'h02, W_40};     // switch to 4-bit
      6'd4:  o = '{1'b0, 1'b0, 8'h28, W_40};     // function set
      6'd5:  o = '{1'b0, 1'b0, 8'h06, W_40};     // entry mode
      6'd6:  o = '{1'b0, 1'b0, 8'h0C, W_40};     // display on
      6'd7:  o = '{1'b0, 1'b0, 8'h01, W_1640};   // clear
      6'd8:  o = '{1'b0, 1'b0, 8'h80, W_40};     // line 1, column 0
      6'd9:  o.data = "F";
      6'd10: o.data = "r";
      6'd11: o.data = "e";
      6'd12: o.data = "q";
      6'd13: o.data = ":";
      6'd16: o.data = digit_char(fdig_q[3], fb3);
      6'd17: o.data = digit_char(fdig_q[2], fb2);
      6'd18: o.data = digit_char(fdig_q[1], fb1);
      6'd19: o.data = digit_char(fdig_q[0], 1'b0);
      6'd21: o.data = "H";
      6'd22: o.data = "z";
      6'd25: o = '{1'b0, 1'b0, 8'hC0, W_40};     // line 2, column 0
      6'd26: o.data = "B";
      6'd27: o.data = "i";
      6'd28: o.data = "n";
      6'd29: o.data = ":";
      6'd34: o.data = digit_char(bdig_q[2], bb2);
      6'd35: o.data = digit_char(bdig_q[1], bb1);
      6'd36: o.data = digit_char(bdig_q[0], 1'b0);
      default: ;                                 // blanks
    endcase
    return o;
  endfunction

  function automatic logic [CW-1:0] wait_cycles(input wait_e w);
    unique case (w)
      W_LONG:  return CW'(WAIT_4100);
      W_100:   return CW'(WAIT_100);
      W_1640:  return CW'(WAIT_1640);
      default: return CW'(WAIT_40);
    endcase
  endfunction

  assign op     = op_at(pc_q);
  assign lcd_rw = 1'b0;
  assign ready  = (st_q == L_IDLE) && !pending_q;

  always_ff @(posedge clk) begin
    logic [15:0] fb, bb;
    if (rst) begin
      st_q      <= L_WAIT;
      pc_q      <= '0;
      cnt_q     <= CW'(WAIT_PWR - 1);
      second_q  <= 1'b0;
      pending_q <= 1'b0;
      lcd_e     <= 1'b0;
      lcd_rs    <= 1'b0;
      lcd_d     <= '0;
      for (int i = 0; i < 4; i++) fdig_q[i] <= '0;
      for (int i = 0; i < 3; i++) bdig_q[i] <= '0;
    end else begin
      if (lcd_start) pending_q <= 1'b1;
      unique case (st_q)
        L_WAIT: begin
          if (cnt_q == '0) begin
            if (second_q) begin
              st_q <= L_SETUP;                     // low nibble of this byte
            end else if (pc_q == 6'(PC_IDLE) || pc_q == 6'(PC_LAST + 1)) begin
              pc_q <= 6'(PC_IDLE);
              st_q <= L_IDLE;
            end else begin
              st_q <= L_SETUP;
            end
          end else begin
            cnt_q <= cnt_q - 1'b1;
          end
        end
        L_IDLE: if (pending_q || lcd_start) begin
          pending_q <= 1'b0;
          fb = to_bcd(freq_hz);
          bb = to_bcd(13'(bin_idx));
          for (int i = 0; i < 4; i++) fdig_q[i] <= fb[4*i +: 4];
          for (int i = 0; i < 3; i++) bdig_q[i] <= bb[4*i +: 4];
          st_q <= L_SETUP;
        end
        L_SETUP: begin
          lcd_rs <= op.rs;
          lcd_d  <= (op.nib_only || second_q) ? op.data[3:0] : op.data[7:4];
          lcd_e  <= 1'b0;
          cnt_q  <= CW'(E_CYC - 1);
          st_q   <= L_EHIGH;
        end
        L_EHIGH: begin
          lcd_e <= 1'b1;
          if (cnt_q == '0) st_q <= L_HOLD;
          else             cnt_q <= cnt_q - 1'b1;
        end
        L_HOLD: begin
          lcd_e <= 1'b0;
          st_q  <= L_WAIT;
          if (!op.nib_only && !second_q) begin
            second_q <= 1'b1;
            cnt_q    <= CW'(NIB_GAP - 1);
          end else begin
            second_q <= 1'b0;
            cnt_q    <= wait_cycles(op.wait_sel) - 1'b1;
            pc_q     <= pc_q + 1'b1;
          end
        end
        default: st_q <= L_WAIT;
      endcase
    end
  end

endmodule
