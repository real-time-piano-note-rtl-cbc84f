// tb_lcd_controller: self-checking test of the LCD controller against the
// behavioural 16x2 panel model, which decodes the 4-bit bus and checks every
// set-up delay the panel needs. Checks: `ready` only after the full power-on
// sequence (>= 15 ms + wake-up + clear), one clear, no timing violation, the
// exact text of both lines for several values, a start arriving while the
// panel is being written is remembered and served, and one update takes
// 34 bytes (32 characters, 2 address commands).
`timescale 1ns/1ps
module tb_lcd_controller;
  logic clk = 0, rst = 1, lcd_start = 0;
  logic [12:0] freq_hz = 0;
  logic [8:0]  bin_idx = 0;
  logic ready, lcd_e, lcd_rs, lcd_rw;
  logic [3:0] lcd_d;
  int checks = 0, failures = 0;

  always #100 clk = ~clk;   // 5 MHz

  lcd_controller dut (.clk, .rst, .lcd_start, .freq_hz, .bin_idx, .ready,
                      .lcd_e, .lcd_rs, .lcd_rw, .lcd_d);
  lcd_model panel (.lcd_e, .lcd_rs, .lcd_rw, .lcd_d);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic show(input int f, input int b);
    string l1, l2;
    int c0;
    c0 = panel.chars_written;
    @(posedge clk); freq_hz <= 13'(f); bin_idx <= 9'(b); lcd_start <= 1;
    @(posedge clk); lcd_start <= 0;
    @(posedge clk);
    wait (ready);
    l1 = $sformatf("Freq:  %4d Hz  ", f);
    l2 = $sformatf("Bin:    %3d     ", b);
    check(panel.line(0) == l1, $sformatf("line 1 '%s', expected '%s'", panel.line(0), l1));
    check(panel.line(1) == l2, $sformatf("line 2 '%s', expected '%s'", panel.line(1), l2));
    check(panel.chars_written - c0 == 32, $sformatf("%0d characters in update", panel.chars_written - c0));
  endtask

  initial begin
    int i0, c0;
    repeat (3) @(posedge clk); rst <= 0;
    @(posedge clk);
    wait (ready);
    check($realtime >= 15.0e6 + 4.1e6 + 1.64e6, $sformatf("ready at %0t", $realtime));
    check(panel.clears == 1, "display cleared once");
    check(panel.instr == 4, $sformatf("%0d configuration bytes", panel.instr));
    show(293, 35);
    show(131, 16);
    show(4272, 511);
    show(0, 0);
    // start while busy: remembered
    i0 = panel.instr; c0 = panel.chars_written;
    @(posedge clk); freq_hz <= 13'd350; bin_idx <= 9'd42; lcd_start <= 1;
    @(posedge clk); lcd_start <= 0;
    repeat (2000) @(posedge clk);
    check(!ready, "busy while writing");
    freq_hz <= 13'd1047; bin_idx <= 9'd125; lcd_start <= 1;
    @(posedge clk); lcd_start <= 0;
    @(posedge clk);
    wait (ready);
    check(panel.instr - i0 == 4, "two updates, two address commands each");
    check(panel.chars_written - c0 == 64, "second start served after the first");
    check(panel.line(0) == "Freq:  1047 Hz  ", "final line 1 shows the later value");
    check(panel.timing_errors == 0, $sformatf("%0d panel timing violations", panel.timing_errors));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200.0 * 400000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
