// tb_eltwise_add: self-checking test of the elementwise adder at its
// defaults (256 channels of signed 4-bit values).
// Two independent random input streams and random output backpressure; each
// output channel must be the saturated sum of the matching input pair, and
// saturation (both directions) must have occurred during the test.
module tb_eltwise_add;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned C = 256, B = 4;
  logic clk = 0, rst = 1;
  logic a_valid = 0, a_ready, b_valid = 0, b_ready, out_valid, out_ready = 0;
  logic [C*B-1:0] a_data = '0, b_data = '0, out_data;
  logic [C*B-1:0] qa [$], qb [$];
  int unsigned checks = 0, failures = 0, nout = 0, sat_hi = 0, sat_lo = 0;
  bit ta = 0, tbk = 0;

  always #5 clk = ~clk;
  eltwise_add dut (.*);

  always @(posedge clk) begin
    ta = a_valid && a_ready;
    tbk = b_valid && b_ready;
    if (ta) qa.push_back(a_data);
    if (tbk) qb.push_back(b_data);
    if (!rst && out_valid && out_ready) begin
      automatic logic [C*B-1:0] x = qa.pop_front(), y = qb.pop_front();
      for (int c = 0; c < C; c++) begin
        automatic int s = $signed(x[c*B +: B]) + $signed(y[c*B +: B]);
        if (s > 7) begin s = 7; sat_hi++; end
        if (s < -8) begin s = -8; sat_lo++; end
        checks++;
        if ($signed(out_data[c*B +: B]) != s) begin
          failures++;
          if (failures < 10) $display("ch %0d: got %0d want %0d", c, $signed(out_data[c*B +: B]), s);
        end
      end
      nout++;
    end
  end
  always @(negedge clk) if (!rst) begin
    if (!a_valid || ta) begin
      a_valid <= $urandom_range(2) != 0;
      for (int c = 0; c < C; c++) a_data[c*B +: B] <= B'($urandom);
    end
    if (!b_valid || tbk) begin
      b_valid <= $urandom_range(2) != 0;
      for (int c = 0; c < C; c++) b_data[c*B +: B] <= B'($urandom);
    end
    out_ready <= $urandom_range(3) != 0;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    wait (nout == 200);
    checks++;
    if (sat_hi == 0 || sat_lo == 0) begin failures++; $display("saturation never exercised"); end
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
