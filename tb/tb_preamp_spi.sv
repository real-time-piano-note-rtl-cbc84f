// tb_preamp_spi: self-checking test of the LTC6912 gain writer against the
// behavioural front-end model. Each write must land in the amplifier's gain
// register, the read-back must return the word held old_word the write, amp_cs
// must frame exactly 8 rising sck edges, and a write must take 1 + 16*HALF +
// 1 clocks of busy.
`timescale 1ns/1ps
module tb_preamp_spi;
  localparam int HALF = 2;
  logic clk = 0, rst = 1, load = 0;
  logic [3:0] gain_a = 0, gain_b = 0;
  logic busy, done, spi_sck, spi_mosi, amp_cs, amp_dout, spi_miso;
  logic [7:0] prev_word;
  int checks = 0, failures = 0, edges = 0;

  always #100 clk = ~clk;

  preamp_spi #(.HALF_PERIOD(HALF)) dut (
    .clk, .rst, .load, .gain_a, .gain_b, .busy, .done,
    .spi_sck, .spi_mosi, .amp_cs, .amp_dout, .prev_word
  );

  afe_model afe (.spi_sck, .spi_mosi, .amp_cs, .amp_shdn(1'b0), .ad_conv(1'b0),
                 .spi_miso, .amp_dout);

  always @(posedge spi_sck) if (!amp_cs) edges++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [7:0] old_word, w;
    int busy_clks;
    repeat (3) @(posedge clk); rst <= 0; repeat (2) @(posedge clk);
    for (int i = 0; i < 12; i++) begin
      w = (i == 0) ? 8'hA5 : 8'($urandom);
      old_word = afe.gain_word;
      edges = 0;
      gain_a <= w[3:0]; gain_b <= w[7:4]; load <= 1;
      @(posedge clk); load <= 0;
      busy_clks = 0;
      @(posedge clk);
      while (busy) begin busy_clks++; @(posedge clk); end
      #1;
      check(afe.gain_word == w, $sformatf("gain word %h, expected %h", afe.gain_word, w));
      check(prev_word == old_word, $sformatf("read-back %h, expected %h", prev_word, old_word));
      check(edges == 8, $sformatf("%0d sck edges in frame", edges));
      check(busy_clks == 1 + 16 * HALF + 1, $sformatf("busy for %0d clocks", busy_clks));
      check(amp_cs == 1'b1 && spi_sck == 1'b0, "bus idle after write");
      repeat ($urandom_range(1, 5)) @(posedge clk);
    end
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
