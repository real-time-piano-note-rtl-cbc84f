// tb_sample_memory: self-checking test of the capture buffer. A counting
// stream stands in for the ADC (a new word every few clocks). After a capture
// request, word k of the buffer must be stream word 16*k (the first word after
// the request is word 0, as recorded by the testbench), the buffer must be full after exactly 512 stores and
// then hold its contents, and a second capture must overwrite it.
`timescale 1ns/1ps
module tb_sample_memory;
  localparam int DEPTH = 512, DOWN = 16;
  logic clk = 0, rst = 1, capture = 0, in_valid = 0;
  logic signed [13:0] in_data = 0;
  logic filling, full, stored;
  logic [8:0] rd_addr = 0;
  logic signed [13:0] rd_data;
  int checks = 0, failures = 0, stores = 0, words = 0;

  always #100 clk = ~clk;

  sample_memory dut (.clk, .rst, .capture, .in_data, .in_valid, .filling, .full,
                     .stored, .rd_addr, .rd_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stream: value = 3*n + offset, one word every 3 clocks
  int offset = 0;
  logic signed [13:0] log_q[$];
  bit logging = 0;
  always @(posedge clk) begin
    if (capture) begin
      logging <= 1'b1;
      log_q.delete();
      stores  <= 0;
    end else begin
      if (in_valid && logging) log_q.push_back(in_data);
      if (stored) stores <= stores + 1;
    end
  end

  always @(posedge clk) begin
    in_valid <= 1'b0;
    if (!rst && (words % 1) == 0 && ($time / 200) % 3 == 0) begin
      in_valid <= 1'b1;
      in_data  <= 14'(3 * words + offset);
      words    <= words + 1;
    end
  end

  task automatic do_capture();
    @(posedge clk); capture <= 1; @(posedge clk); capture <= 0; #1;
  endtask

  task automatic verify(input string tag);
    for (int k = 0; k < DEPTH; k++) begin
      rd_addr = 9'(k); #1;
      check(rd_data == log_q[DOWN * k],
            $sformatf("%s word %0d = %0d, expected %0d", tag, k, rd_data, log_q[DOWN * k]));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst <= 0; repeat (10) @(posedge clk);
    check(!full && !filling, "idle after reset");
    do_capture();
    check(filling, "filling after capture");
    wait (full);
    @(posedge clk); #1;
    check(stores == DEPTH, $sformatf("%0d stores", stores));
    check(!filling, "stopped when full");
    repeat (500) @(posedge clk);
    check(stores == DEPTH, "no store after full");
    verify("first");
    offset = 1000;
    do_capture();
    check(!full, "full cleared by capture");
    wait (full);
    verify("second");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200 * 200000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
