// tb_stream_duplicator: self-checking test of the stream duplicator.
// Random input and independent random backpressure on the two outputs: each
// output must deliver every input beat exactly once, in order. A phase with
// one output stopped checks that the input is then held off (no beat may be
// lost or skipped on the stopped branch).
module tb_stream_duplicator;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned W = 32;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, out0_valid, out0_ready = 0, out1_valid, out1_ready = 0;
  logic [W-1:0] in_data = '0, out0_data, out1_data;
  logic [W-1:0] q0 [$], q1 [$];
  int unsigned checks = 0, failures = 0, n0 = 0, n1 = 0, p0 = 70, p1 = 40, nin = 0;
  bit took = 0;

  always #5 clk = ~clk;
  stream_duplicator #(.WIDTH(W)) dut (.*);

  always @(posedge clk) begin
    took = in_valid && in_ready;
    if (took) begin q0.push_back(in_data); q1.push_back(in_data); nin++; end
    if (!rst && out0_valid && out0_ready) begin
      automatic logic [W-1:0] w = q0.pop_front();
      checks++; n0++;
      if (out0_data !== w) begin failures++; $display("out0 %h want %h", out0_data, w); end
    end
    if (!rst && out1_valid && out1_ready) begin
      automatic logic [W-1:0] w = q1.pop_front();
      checks++; n1++;
      if (out1_data !== w) begin failures++; $display("out1 %h want %h", out1_data, w); end
    end
  end
  always @(negedge clk) if (!rst) begin
    if (!in_valid || took) begin in_valid <= $urandom_range(1); in_data <= $urandom; end
    out0_ready <= $urandom_range(99) < p0;
    out1_ready <= $urandom_range(99) < p1;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3000) @(posedge clk);
    p1 = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (in_ready) begin failures++; $display("input accepted with branch 1 stopped"); end
    p1 = 100; p0 = 100;
    repeat (100) @(posedge clk);
    checks++;
    if (n0 != n1 || n0 + 2 < nin) begin failures++; $display("counts %0d %0d %0d", n0, n1, nin); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
