// tb_thresholding: self-checking test of the stand-alone thresholding unit at
// its defaults (256 channels, 4-bit signed in, 2-bit signed out).
// Random sorted thresholds per channel, random input vectors, random output
// backpressure; each output channel must equal (number of thresholds the
// input reaches) - 2, and vectors must come out once and in order.
module tb_thresholding;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned C = 256, IB = 4, OB = 2, NT = 3;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, thr_we = 0;
  logic [C*IB-1:0] in_data = '0;
  logic [C*OB-1:0] out_data;
  logic [7:0] thr_ch = '0;
  logic [1:0] thr_idx = '0;
  logic signed [4:0] thr_data = '0;
  int thr [C][NT];
  logic [C*IB-1:0] sent [$];
  int unsigned checks = 0, failures = 0, nout = 0;
  bit took = 0;

  always #5 clk = ~clk;
  thresholding dut (.*);

  always @(posedge clk) begin
    took = in_valid && in_ready;
    if (took) sent.push_back(in_data);
    if (!rst && out_valid && out_ready) begin
      automatic logic [C*IB-1:0] x = sent.pop_front();
      for (int c = 0; c < C; c++) begin
        automatic int v = $signed(x[c*IB +: IB]), cnt = 0;
        for (int k = 0; k < NT; k++) if (v >= thr[c][k]) cnt++;
        checks++;
        if ($signed(out_data[c*OB +: OB]) != cnt - 2) begin
          failures++;
          if (failures < 10) $display("ch %0d in %0d: got %0d want %0d", c, v, $signed(out_data[c*OB +: OB]), cnt - 2);
        end
      end
      nout++;
    end
  end

  initial begin
    for (int c = 0; c < C; c++) begin
      thr[c][0] = int'($urandom_range(10)) - 9;
      thr[c][1] = thr[c][0] + int'($urandom_range(5));
      thr[c][2] = thr[c][1] + int'($urandom_range(5));
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < C; c++) for (int k = 0; k < NT; k++) begin
      @(negedge clk); thr_we <= 1; thr_ch <= 8'(c); thr_idx <= 2'(k); thr_data <= 5'(thr[c][k]);
    end
    @(negedge clk); thr_we <= 0;
    fork
      forever begin
        @(negedge clk);
        if (!in_valid || took) begin
          in_valid <= $urandom_range(3) != 0;
          for (int c = 0; c < C; c++) in_data[c*IB +: IB] <= IB'($urandom);
        end
        out_ready <= $urandom_range(3) != 0;
      end
    join_none
    wait (nout == 200);
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
