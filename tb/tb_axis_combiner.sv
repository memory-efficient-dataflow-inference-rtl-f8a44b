// tb_axis_combiner: self-checking test of the two-stream combiner. Two random
// producers send numbered words on a and b, a random consumer takes the
// combined stream. Checks: output n is {b word n, a word n}, both inputs are
// consumed only together, and m_valid is exactly a_valid && b_valid.
module tb_axis_combiner;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned W = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic a_valid = 0, a_ready, b_valid = 0, b_ready, m_valid, m_ready = 0;
  logic [W-1:0] a_data = 0, b_data = 0;
  logic [2*W-1:0] m_data;
  axis_combiner #(.WIDTH(W)) dut (.*);

  int checks = 0, failures = 0, nout = 0;
  int an = 0, bn = 0;
  bit atook = 0, btook = 0;

  initial begin #1000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  always @(posedge clk) begin
    if (!rst) begin
      checks++;
      if (m_valid !== (a_valid && b_valid) || (a_valid && a_ready) !== (b_valid && b_ready)) failures++;
      if (m_valid && m_ready) begin
        checks++;
        if (m_data !== {8'(nout * 5 + 1), 8'(nout)}) begin
          failures++;
          if (failures < 10) $display("out %0d: got %h", nout, m_data);
        end
        nout++;
      end
    end
    atook = !rst && a_valid && a_ready;
    btook = !rst && b_valid && b_ready;
    if (atook) an++;
    if (btook) bn++;
  end

  always @(negedge clk) begin
    if (!rst) begin
      if (!a_valid || atook) begin a_valid = ($urandom_range(0, 2) != 0); a_data = 8'(an); end
      if (!b_valid || btook) begin b_valid = ($urandom_range(0, 3) != 0); b_data = 8'(bn * 5 + 1); end
      m_ready = ($urandom_range(0, 2) != 0);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (10000) @(posedge clk);
    checks++;
    if (an != bn || an != nout) begin failures++; $display("counts a=%0d b=%0d out=%0d", an, bn, nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
