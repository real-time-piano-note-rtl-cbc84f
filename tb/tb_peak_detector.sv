// tb_peak_detector: self-checking test of the peak-bin search. Random spectra
// (and spectra with a planted peak, a DC spike, a mirrored peak and a tie)
// are streamed in natural order; the reported bin and squared magnitude must
// match a reference search over bins 1..N/2-1 with the lower bin winning a
// tie, and `done` must be seen at the second clock edge after dv falls.
`timescale 1ns/1ps
module tb_peak_detector;
  localparam int N = 512, W = 14;
  logic clk = 0, rst = 1, dv = 0;
  logic [8:0] xk_index = 0;
  logic signed [W-1:0] xk_re = 0, xk_im = 0;
  logic [8:0] peak_idx;
  logic [2*W:0] peak_mag;
  logic update, done;
  int checks = 0, failures = 0, updates = 0;

  always #100 clk = ~clk;
  always @(posedge clk) if (update) updates <= updates + 1;

  peak_detector dut (.clk, .rst, .dv, .xk_index, .xk_re, .xk_im, .peak_idx, .peak_mag,
                     .update, .done);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int re_v [N];
  int im_v [N];

  task automatic run_frame(input int kind);
    longint best, m;
    int bi, lat;
    for (int k = 0; k < N; k++) begin
      re_v[k] = $urandom_range(0, 400) - 200;
      im_v[k] = $urandom_range(0, 400) - 200;
    end
    if (kind == 1) begin re_v[0] = 8191; re_v[37] = -3000; im_v[37] = 2500; end
    if (kind == 2) begin re_v[N - 20] = 8000; re_v[20] = 7999; end
    if (kind == 3) begin re_v[100] = 5000; im_v[100] = 0; re_v[60] = -5000; im_v[60] = 0; end // tie
    if (kind == 4) begin re_v[255] = -8192; im_v[255] = -8192; end // largest value
    best = 0; bi = 1;
    for (int k = 1; k <= N / 2 - 1; k++) begin
      m = longint'(re_v[k]) * re_v[k] + longint'(im_v[k]) * im_v[k];
      if (m > best) begin best = m; bi = k; end
    end
    for (int k = 0; k < N; k++) begin
      @(posedge clk);
      dv <= 1; xk_index <= 9'(k); xk_re <= W'(re_v[k]); xk_im <= W'(im_v[k]);
    end
    @(posedge clk); dv <= 0;
    lat = 0;
    while (!done) begin @(posedge clk); lat++; if (lat > 10) break; end
    check(lat == 2, $sformatf("done %0d clocks after dv fell", lat));
    check(peak_idx == 9'(bi), $sformatf("kind %0d: peak bin %0d, expected %0d", kind, peak_idx, bi));
    check(peak_mag == (2*W+1)'(best), $sformatf("kind %0d: peak mag %0d, expected %0d", kind, peak_mag, best));
    repeat ($urandom_range(0, 20)) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst <= 0; repeat (2) @(posedge clk);
    for (int f = 0; f < 12; f++) run_frame(f % 5);
    check(updates > 12, "running maximum updated within frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200 * 100000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
