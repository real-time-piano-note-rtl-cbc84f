// tb_debounce_oneshot: self-checking test of the pushbutton debouncer.
// A bouncing press must give exactly one pulse, DEBOUNCE_CYCLES + 3 clocks
// after the last bounce; glitches shorter than the debounce time and the
// bouncing release must give none.
`timescale 1ns/1ps
module tb_debounce_oneshot;
  localparam int DB = 20;
  logic clk = 0, rst = 1, btn = 0;
  logic level, pulse;
  int checks = 0, failures = 0, pulses = 0, cyc = 0, last_pulse_cyc = -1;

  always #100 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (pulse) begin pulses <= pulses + 1; last_pulse_cyc <= cyc; end
  end

  debounce_oneshot #(.DEBOUNCE_CYCLES(DB)) dut (.clk, .rst, .btn, .level, .pulse);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wait_clks(input int n);
    repeat (n) @(posedge clk);
  endtask

  initial begin
    int t_edge;
    wait_clks(3); rst <= 0; wait_clks(3);
    // glitch shorter than debounce
    btn <= 1; wait_clks(DB / 2); btn <= 0; wait_clks(3 * DB);
    check(pulses == 0 && level == 0, "short glitch ignored");
    // bouncing press
    for (int i = 0; i < 5; i++) begin btn <= 1; wait_clks(3); btn <= 0; wait_clks(2); end
    btn <= 1; t_edge = cyc;
    wait_clks(3 * DB);
    check(pulses == 1, $sformatf("one pulse per press (got %0d)", pulses));
    check(level == 1, "level high while pressed");
    check(last_pulse_cyc - t_edge == DB + 3,
          $sformatf("pulse latency %0d, expected %0d", last_pulse_cyc - t_edge, DB + 3));
    // held button: no further pulse
    wait_clks(5 * DB);
    check(pulses == 1, "no repeat while held");
    // bouncing release
    for (int i = 0; i < 5; i++) begin btn <= 0; wait_clks(2); btn <= 1; wait_clks(2); end
    btn <= 0; wait_clks(3 * DB);
    check(pulses == 1 && level == 0, "release gives no pulse");
    // second press
    btn <= 1; wait_clks(3 * DB);
    check(pulses == 2, "second press gives a second pulse");
    // pulse is a single clock wide: checked by counting clocks high
    btn <= 0; wait_clks(3 * DB);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // single-cycle pulse rule
  always @(posedge clk) if (pulse) begin
    @(posedge clk);
    checks++;
    if (pulse) begin failures++; $display("FAIL: pulse longer than one clock"); end
  end

  initial begin
    #(200 * 5000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
