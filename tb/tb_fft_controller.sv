// tb_fft_controller: self-checking test of the main state machine against
// the behavioural burst-I/O FFT core model. The testbench plays the sample
// memory (an array indexed by fft_index, `full` some time after the capture
// pulse) and the peak detector (`peak_done` two clocks after dv falls).
// Checks: one configuration write with fwd_inv = 1 and the default scaling,
// the state codes visit 1,0,2,3,5,7,0 in that order, the core receives every
// sample at its own index, the load phase lasts N clocks of rfd, exactly one
// unload per frame, one result_valid per frame, and capture requests outside
// IDLE are ignored.
`timescale 1ns/1ps
module tb_fft_controller;
  import pnd_pkg::*;
  localparam int N = 512;
  logic clk = 0, rst = 1, capture_req = 0, mem_full = 0, peak_done = 0;
  logic mem_capture, fft_start, fft_unload, fft_fwd_inv, fft_fwd_inv_we, fft_scale_sch_we;
  logic [9:0] fft_scale_sch;
  logic [8:0] fft_index, xn_index, xk_index;
  logic rfd, busy, edone, done, dv, ovflo, result_valid;
  logic signed [13:0] xk_re, xk_im;
  ctrl_state_e state;
  logic signed [13:0] arr [N];
  int checks = 0, failures = 0, unloads = 0, results = 0, rfd_clks = 0, cfg = 0, caps = 0;
  ctrl_state_e seq[$];

  always #100 clk = ~clk;

  fft_controller dut (
    .clk, .rst, .capture_req, .mem_capture, .mem_full, .fft_index,
    .fft_start, .fft_unload, .fft_fwd_inv, .fft_fwd_inv_we, .fft_scale_sch, .fft_scale_sch_we,
    .fft_rfd(rfd), .fft_busy(busy), .fft_edone(edone), .fft_dv(dv), .fft_xn_index(xn_index),
    .peak_done, .result_valid, .state);

  xfft_model #(.N(N), .PROC_CYCLES(300)) core (
    .clk, .start(fft_start), .unload(fft_unload), .xn_re(arr[fft_index]), .xn_im(14'sd0),
    .fwd_inv(fft_fwd_inv), .fwd_inv_we(fft_fwd_inv_we), .scale_sch(fft_scale_sch),
    .scale_sch_we(fft_scale_sch_we), .rfd, .busy, .edone, .done, .dv,
    .xn_index, .xk_index, .xk_re, .xk_im, .ovflo);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // play the memory and the peak detector
  logic dv_d1 = 0, dv_d2 = 0;
  always @(posedge clk) if (!rst) begin
    dv_d1 <= dv; dv_d2 <= dv_d1;
    peak_done <= dv_d1 && !dv;   // 2 clocks after the last bin
    if (mem_capture) begin
      mem_full <= 1'b0;
      caps <= caps + 1;
      fork begin repeat (40) @(posedge clk); mem_full <= 1'b1; end join_none
    end
    if (fft_unload) unloads <= unloads + 1;
    if (result_valid) results <= results + 1;
    if (rfd) rfd_clks <= rfd_clks + 1;
    if (fft_fwd_inv_we) cfg <= cfg + 1;
    if (seq.size() == 0 || seq[$] != state) seq.push_back(state);
    if (fft_start) check(state == ST_LOAD, "start only while loading");
  end

  task automatic frame(input int f);
    int u0, r0;
    for (int k = 0; k < N; k++) arr[k] = 14'($urandom);
    u0 = unloads; r0 = results; rfd_clks = 0;
    @(posedge clk); capture_req <= 1; @(posedge clk); capture_req <= 0;
    // a request while busy must be ignored
    repeat (100) @(posedge clk); capture_req <= 1; @(posedge clk); capture_req <= 0;
    wait (result_valid); @(posedge clk); #1;
    for (int k = 0; k < N; k++)
      if (core.x_re[k] != real'(arr[k])) begin
        check(0, $sformatf("frame %0d sample %0d loaded as %0f, expected %0d", f, k, core.x_re[k], arr[k]));
        break;
      end
    check(1, "samples loaded");
    check(rfd_clks == N, $sformatf("%0d clocks of rfd", rfd_clks));
    check(unloads - u0 == 1, "one unload per frame");
    check(results - r0 == 1, "one result per frame");
    check(state == ST_IDLE, "back to idle");
    repeat (20) @(posedge clk);
  endtask

  initial begin
    ctrl_state_e expect_seq[7];
    repeat (3) @(posedge clk); rst <= 0; repeat (5) @(posedge clk);
    check(cfg == 1, "one configuration write");
    check(core.fwd == 1'b1 && core.sch == 10'b01_10_10_10_10, "forward transform, default scaling");
    frame(0);
    expect_seq = '{ST_CONFIG, ST_IDLE, ST_CAPTURE, ST_LOAD, ST_COMPUTE, ST_UNLOAD, ST_IDLE};
    for (int i = 0; i < 7; i++)
      check(seq.size() > i && seq[i] == expect_seq[i], $sformatf("state %0d in sequence", i));
    frame(1);
    frame(2);
    check(caps == 3, $sformatf("%0d captures for 3 frames (busy requests ignored)", caps));
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
