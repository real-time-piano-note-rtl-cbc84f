// tb_bin_to_hz: self-checking test of the bin-to-hertz scaling. Every bin
// 0..511 is converted and compared with round(k * 5e6 / (73*16*512)) worked
// out in double precision; the result must follow in_valid by one clock.
// Also checks the two bins nearest the notes D4 (293.66 Hz) and C3 (130.81 Hz).
`timescale 1ns/1ps
module tb_bin_to_hz;
  logic clk = 0, rst = 1, in_valid = 0;
  logic [8:0] bin_idx = 0;
  logic out_valid;
  logic [12:0] freq_hz;
  int checks = 0, failures = 0;

  always #100 clk = ~clk;

  bin_to_hz dut (.clk, .rst, .in_valid, .bin_idx, .out_valid, .freq_hz);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    real df, ref_hz;
    df = 5.0e6 / (73.0 * 16.0 * 512.0);
    repeat (3) @(posedge clk); rst <= 0; @(posedge clk);
    for (int k = 0; k < 512; k++) begin
      in_valid <= 1; bin_idx <= 9'(k);
      @(posedge clk); in_valid <= 0;
      @(posedge clk); #1;
      check(out_valid == 0, "out_valid is one clock wide");
      ref_hz = $floor(real'(k) * df + 0.5);
      check(freq_hz == 13'($rtoi(ref_hz)), $sformatf("bin %0d: %0d Hz, expected %0.0f", k, freq_hz, ref_hz));
    end
    // latency: one clock
    @(posedge clk); in_valid <= 1; bin_idx <= 9'd35;
    @(posedge clk); in_valid <= 0; #1;
    check(out_valid == 1 && freq_hz == 13'd293, $sformatf("bin 35 -> %0d Hz next clock", freq_hz));
    @(posedge clk); in_valid <= 1; bin_idx <= 9'd16;
    @(posedge clk); in_valid <= 0; #1;
    check(out_valid == 1 && freq_hz == 13'd134, $sformatf("bin 16 -> %0d Hz", freq_hz));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200 * 10000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
