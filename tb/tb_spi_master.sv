// tb_spi_master: self-checking test of the shared-bus SPI master. The ADC
// converts continuously; gain requests are issued at random moments. Each
// request must wait for the current ADC frame (counted), the amplifier must
// end up with the requested word, sck must never toggle for the amplifier
// while the ADC is converting, and conversions must resume and stay correct.
// A request made while gain_hold is high must wait for its release.
`timescale 1ns/1ps
module tb_spi_master;
  logic clk = 0, rst = 1, gain_load = 0, gain_hold = 0;
  logic [3:0] gain_a = 0, gain_b = 0;
  logic gain_wait, gain_busy, gain_done;
  logic [7:0] gain_prev;
  logic signed [13:0] sample_a;
  logic sample_valid, spi_sck, spi_mosi, spi_miso, amp_cs, amp_shdn, amp_dout, ad_conv;
  int checks = 0, failures = 0, nvalid = 0, waits = 0, bad_edges = 0;

  always #100 clk = ~clk;

  spi_master dut (.clk, .rst, .adc_run(1'b1), .gain_load, .gain_hold, .gain_a, .gain_b,
                  .gain_wait, .gain_busy, .gain_done, .gain_prev,
                  .sample_a, .sample_valid, .spi_sck, .spi_mosi, .spi_miso,
                  .amp_cs, .amp_shdn, .amp_dout, .ad_conv);
  afe_model afe (.spi_sck, .spi_mosi, .amp_cs, .amp_shdn, .ad_conv, .spi_miso, .amp_dout);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (sample_valid) begin
    check(sample_a == afe.last_a, $sformatf("ch A %0d, expected %0d", sample_a, afe.last_a));
    nvalid <= nvalid + 1;
  end
  always @(posedge clk) if (gain_wait && !gain_busy && dut.adc_busy) waits <= waits + 1;
  // amplifier clocked only with amp_cs low, ADC only with amp_cs high
  always @(posedge spi_sck) if (!amp_cs && dut.adc_busy) bad_edges++;

  initial begin
    logic [7:0] w;
    afe.amp_v = 0.3;
    afe.freq_hz = 440.0;
    repeat (3) @(posedge clk); rst <= 0;
    wait (nvalid == 3);
    for (int i = 0; i < 8; i++) begin
      repeat ($urandom_range(5, 200)) @(posedge clk);
      w = 8'($urandom) & 8'h77;
      gain_a <= w[3:0]; gain_b <= w[7:4]; gain_load <= 1;
      @(posedge clk); gain_load <= 0;
      wait (gain_done); @(posedge clk); #1;
      check(afe.gain_word == w, $sformatf("gain %h, expected %h", afe.gain_word, w));
      check(amp_shdn == 1'b0, "amplifier not shut down");
    end
    // a held request must wait, with conversions continuing, until released
    begin
      int n0, g0;
      g0 = afe.gain_writes;
      gain_hold <= 1;
      gain_a <= 4'd5; gain_b <= 4'd6; gain_load <= 1;
      @(posedge clk); gain_load <= 0;
      n0 = nvalid;
      repeat (73 * 6) @(posedge clk);
      check(afe.gain_writes == g0, "no gain write while held");
      check(nvalid - n0 >= 5, "conversions continue while a request is held");
      check(gain_wait, "request still pending while held");
      gain_hold <= 0;
      wait (gain_done); @(posedge clk); #1;
      check(afe.gain_word == 8'h65, "held request written after release");
    end
    begin
      int n0;
      n0 = nvalid;
      repeat (73 * 5 + 10) @(posedge clk);
      check(nvalid - n0 >= 5, "conversions resume after gain writes");
    end
    check(bad_edges == 0, $sformatf("%0d sck edges with both devices active", bad_edges));
    check(waits > 0, "a gain request had to wait for an ADC frame");
    check(afe.gain_writes == 9, $sformatf("%0d amplifier writes", afe.gain_writes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200 * 50000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
