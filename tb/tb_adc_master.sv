// tb_adc_master: self-checking test of the LTC1407A conversion engine
// against the behavioural front-end model. Every returned channel-A and
// channel-B word must equal the code the model converted at the matching
// ad_conv edge, words must arrive exactly SAMPLE_SPACING (73) clocks apart,
// and dropping `enable` must finish the current frame and then stop.
`timescale 1ns/1ps
module tb_adc_master;
  logic clk = 0, rst = 1, enable = 0;
  logic busy, ad_conv, spi_sck, spi_miso, amp_dout;
  logic signed [13:0] sample_a, sample_b;
  logic sample_valid;
  int checks = 0, failures = 0, cyc = 0, last_valid = -1, nvalid = 0;

  always #100 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  adc_master dut (.clk, .rst, .enable, .busy, .ad_conv, .spi_sck, .spi_miso,
                  .sample_a, .sample_b, .sample_valid);
  afe_model afe (.spi_sck, .spi_mosi(1'b0), .amp_cs(1'b1), .amp_shdn(1'b0), .ad_conv,
                 .spi_miso, .amp_dout);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (sample_valid) begin
    check(sample_a == afe.last_a, $sformatf("ch A %0d, expected %0d", sample_a, afe.last_a));
    check(sample_b == afe.last_b, $sformatf("ch B %0d, expected %0d", sample_b, afe.last_b));
    if (last_valid >= 0)
      check(cyc - last_valid == 73, $sformatf("spacing %0d clocks", cyc - last_valid));
    last_valid <= cyc;
    nvalid <= nvalid + 1;
  end

  initial begin
    int conv_at_stop;
    afe.amp_v = 1.2;
    afe.freq_hz = 1234.0;
    afe.gain_word = 8'h21;     // ch A gain -1, ch B gain -2 (saturates at peaks)
    repeat (3) @(posedge clk); rst <= 0; repeat (2) @(posedge clk);
    enable <= 1;
    wait (nvalid == 60);
    // stop in the middle of a frame
    repeat (20) @(posedge clk);
    enable <= 0;
    conv_at_stop = afe.conversions;
    wait (!busy);
    repeat (300) @(posedge clk);
    check(afe.conversions == conv_at_stop, "no conversion after enable dropped");
    check(nvalid == 61, $sformatf("frame in progress completed (%0d words)", nvalid));
    check(afe.conversions == nvalid, "one word per conversion");
    // restart
    enable <= 1; last_valid = -1;
    wait (nvalid == 70);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200 * 20000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
