// tb_piano_note_detector: end-to-end test of the note detector at its
// default sizes (5 MHz clock, 73-clock ADC frames, 1-in-16 decimation,
// 512-point transform, 10 ms debounce, real LCD delays).
//
// The analog front end, the FFT core and the LCD panel are behavioural
// models. Three tones are measured with bouncing button presses: 293.68 Hz
// (a D4 key), 130.68 Hz (a C3 key) and a 350.26 Hz test tone. For each, the
// reported bin must be the bin nearest the tone (fs/512 per bin, worked out
// here in floating point), and also the strongest of bins 1..255 of the
// model's spectrum; the frequency and the LCD text must match. The capture
// must take 511*1168 clocks plus at most one ADC frame and store exactly
// one conversion in 16. Every mechanism is counted and must occur: gain
// write, gain write deferred behind an ADC frame, gain write held until a
// capture ends, decimation, buffer full,
// FFT load/compute/unload, peak updates, LCD update, and a sampling request
// ignored while a measurement is running.
`timescale 1ns/1ps
module tb_piano_note_detector;
  import pnd_pkg::*;
  logic clk = 0, rst = 1, btn_sample = 0, btn_gain = 0;
  logic [3:0] gain_a = 4'd1, gain_b = 4'd1;
  logic spi_sck, spi_mosi, spi_miso, amp_cs, amp_shdn, amp_dout, ad_conv;
  logic fft_start, fft_unload, fft_fwd_inv, fft_fwd_inv_we, fft_scale_sch_we;
  logic signed [13:0] fft_xn_re, fft_xn_im, fft_xk_re, fft_xk_im;
  logic [9:0] fft_scale_sch;
  logic fft_rfd, fft_busy, fft_edone, fft_done, fft_dv, fft_ovflo;
  logic [8:0] fft_xn_index, fft_xk_index, peak_bin;
  logic lcd_e, lcd_rs, lcd_rw;
  logic [3:0] lcd_d;
  logic [12:0] freq_hz;
  logic [28:0] peak_mag;
  logic result_valid, lcd_ready, capturing, gain_pending;
  logic [7:0] gain_readback;
  ctrl_state_e state;
  int checks = 0, failures = 0, cyc = 0;
  // mechanism counters
  int n_gain_defer = 0, n_stores = 0, n_unload = 0, n_updates = 0, n_ignored = 0, n_full = 0;
  int n_lcd = 0, n_gain_held = 0;

  always #100 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  piano_note_detector dut (
    .clk, .rst, .btn_sample, .btn_gain, .gain_a, .gain_b,
    .spi_sck, .spi_mosi, .spi_miso, .amp_cs, .amp_shdn, .amp_dout, .ad_conv,
    .fft_start, .fft_unload, .fft_xn_re, .fft_xn_im, .fft_fwd_inv, .fft_fwd_inv_we,
    .fft_scale_sch, .fft_scale_sch_we, .fft_rfd, .fft_busy, .fft_edone, .fft_done,
    .fft_dv, .fft_xn_index, .fft_xk_index, .fft_xk_re, .fft_xk_im,
    .lcd_e, .lcd_rs, .lcd_rw, .lcd_d,
    .peak_bin, .peak_mag, .capturing, .gain_pending, .gain_readback,
    .freq_hz, .result_valid, .lcd_ready, .state);

  afe_model afe (.spi_sck, .spi_mosi, .amp_cs, .amp_shdn, .ad_conv, .spi_miso, .amp_dout);

  xfft_model #(.N(512), .PROC_CYCLES(1400), .UNLOAD_LAT(6)) core (
    .clk, .start(fft_start), .unload(fft_unload), .xn_re(fft_xn_re), .xn_im(fft_xn_im),
    .fwd_inv(fft_fwd_inv), .fwd_inv_we(fft_fwd_inv_we), .scale_sch(fft_scale_sch),
    .scale_sch_we(fft_scale_sch_we), .rfd(fft_rfd), .busy(fft_busy), .edone(fft_edone),
    .done(fft_done), .dv(fft_dv), .xn_index(fft_xn_index), .xk_index(fft_xk_index),
    .xk_re(fft_xk_re), .xk_im(fft_xk_im), .ovflo(fft_ovflo));

  lcd_model panel (.lcd_e, .lcd_rs, .lcd_rw, .lcd_d);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters (the ADC is mid-frame while a gain write waits)
  logic cap_d = 0;
  int cap_start = 0, cap_len = 0;
  always @(posedge clk) if (!rst) begin
    if (dut.u_spi.gain_wait && dut.u_spi.u_adc.busy) n_gain_defer <= n_gain_defer + 1;
    if (dut.mem_stored) n_stores <= n_stores + 1;
    if (fft_unload) n_unload <= n_unload + 1;
    if (dut.peak_update) n_updates <= n_updates + 1;
    if (dut.u_mem.full && !dut.u_mem.filling && cap_d) n_full <= n_full + 1;
    if (dut.lcd_start) n_lcd <= n_lcd + 1;
    cap_d <= capturing;
    if (capturing && !cap_d) cap_start <= cyc;
    if (!capturing && cap_d) cap_len <= cyc - cap_start;
  end

  task automatic press(ref logic b);
    for (int i = 0; i < 4; i++) begin
      b = 1; repeat ($urandom_range(50, 400)) @(posedge clk);
      b = 0; repeat ($urandom_range(50, 400)) @(posedge clk);
    end
    b = 1; repeat (60000) @(posedge clk);
    b = 0; repeat (60000) @(posedge clk);
  endtask

  task automatic measure(input real f, input bit gain_during, input bit extra_press);
    real df, best;
    int nearest, ref_bin, conv0, st0;
    string l1, l2;
    afe.freq_hz = f;
    conv0 = afe.conversions;
    st0 = n_stores;
    fork
      press(btn_sample);
      begin
        if (gain_during) begin
          wait (capturing);
          repeat (1000) @(posedge clk);
          gain_a = 4'd3; gain_b = 4'd3;
          afe.amp_v = 0.1;
          press(btn_gain);
          check(capturing, "gain pressed during a capture");
          check(afe.gain_word == 8'h22 && gain_pending, "gain write held while capturing");
          wait (!capturing);
          n_gain_held++;
          wait (!gain_pending);
          repeat (40) @(posedge clk);  // write itself takes 34 clocks
          check(afe.gain_word == 8'h33, "held gain write done after the capture");
        end
      end
    join
    if (extra_press) begin
      wait (capturing);
      repeat (20000) @(posedge clk);
      press(btn_sample);               // lands mid-capture: must be ignored
      if (state != ST_IDLE) n_ignored++;
    end
    wait (result_valid);
    @(posedge clk); #1;
    df = 5.0e6 / (73.0 * 16.0 * 512.0);
    nearest = $rtoi(f / df + 0.5);
    best = -1.0; ref_bin = 0;
    for (int k = 1; k < 256; k++) begin
      real m;
      m = real'(core.y_re[k]) ** 2 + real'(core.y_im[k]) ** 2;
      if (m > best) begin best = m; ref_bin = k; end
    end
    check(peak_bin == 9'(nearest), $sformatf("%0.2f Hz: bin %0d, nearest bin %0d", f, peak_bin, nearest));
    check(peak_bin == 9'(ref_bin), $sformatf("%0.2f Hz: bin %0d, spectrum peak %0d", f, peak_bin, ref_bin));
    check(freq_hz == 13'($rtoi($floor(real'(nearest) * df + 0.5))),
          $sformatf("%0.2f Hz: shows %0d Hz", f, freq_hz));
    check(cap_len > 511 * 1168 && cap_len <= 511 * 1168 + 73 + 4,
          $sformatf("capture took %0d clocks", cap_len));
    check(n_stores - st0 == 512, $sformatf("%0d words stored", n_stores - st0));
    check(!core.ovflo, "no overflow in the transform");
    wait (!lcd_ready);
    wait (lcd_ready);
    l1 = $sformatf("Freq:  %4d Hz  ", freq_hz);
    l2 = $sformatf("Bin:    %3d     ", nearest);
    check(panel.line(0) == l1, $sformatf("LCD line 1 '%s'", panel.line(0)));
    check(panel.line(1) == l2, $sformatf("LCD line 2 '%s'", panel.line(1)));
    $display("note %0.2f Hz -> bin %0d, %0d Hz, LCD '%s' / '%s'", f, peak_bin, freq_hz,
             panel.line(0), panel.line(1));
    repeat (1000) @(posedge clk);
    check(afe.conversions - conv0 >= 16 * 511, "ADC kept converting; 1 in 16 stored");
  endtask

  initial begin
    afe.amp_v = 0.4;
    afe.tone_on = 1;
    repeat (5) @(posedge clk); rst <= 0;
    // gain -2 on both channels before the first note
    gain_a = 4'd2; gain_b = 4'd2;
    press(btn_gain);
    wait (!gain_pending);
    check(afe.gain_word == 8'h22, $sformatf("preamp gain word %h", afe.gain_word));
    check(gain_readback == 8'h11, "read-back of power-up gain word");
    measure(293.68, 1'b0, 1'b0);   // D4 key as measured
    measure(130.68, 1'b0, 1'b1);   // C3 key as measured, with an ignored second press
    measure(350.26, 1'b1, 1'b0);   // test tone, gain pressed during capture
    check(afe.gain_word == 8'h33, "gain changed during capture");
    check(core.frames == 3, $sformatf("%0d FFT frames", core.frames));
    check(panel.timing_errors == 0, "LCD timing respected");
    // every mechanism must have happened
    check(afe.gain_writes == 2, "gain writes happened");
    check(n_gain_defer > 0, "gain write deferred behind an ADC frame");
    check(n_stores == 3 * 512, "decimated stores happened");
    check(n_full == 3, "buffer-full happened");
    check(n_unload == 3, "unload happened");
    check(n_updates >= 3, "peak updates happened");
    check(n_lcd == 3, "LCD updates happened");
    check(n_ignored == 1, "ignored sampling request happened");
    check(n_gain_held == 1, "gain write held behind a capture happened");
    $display("mechanisms: gain writes %0d, deferred-gain clocks %0d, stores %0d, full %0d, unloads %0d, peak updates %0d, lcd %0d, ignored %0d",
             afe.gain_writes, n_gain_defer, n_stores, n_full, n_unload, n_updates, n_lcd, n_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200.0 * 4_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
