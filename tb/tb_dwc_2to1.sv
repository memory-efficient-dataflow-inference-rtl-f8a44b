// tb_dwc_2to1: self-checking test of the 2:1 data width converter. A random
// producer sends numbered 2*W words, a random consumer takes W words; the
// consumer checks that word n arrives as low half then high half, in order,
// and that AXI-Stream data is held while stalled. A full-rate phase checks
// that one input word per two cycles gives one output word per cycle.
module tb_dwc_2to1;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned W = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [2*W-1:0] s_data = 0;
  logic [W-1:0] m_data;
  dwc_2to1 #(.WIDTH(W)) dut (.*);

  int checks = 0, failures = 0, nout = 0, nin = 0;
  bit full_rate = 0;
  int outs_fast = 0;

  function automatic logic [2*W-1:0] word(int n);
    return {8'(n * 7 + 3), 8'(n)};
  endfunction

  initial begin #1000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  always_ff @(posedge clk) begin
    if (!rst && s_valid && s_ready) nin <= nin + 1;
    if (!rst && m_valid && m_ready) begin
      automatic logic [2*W-1:0] e = word(nout / 2);
      checks++;
      if (m_data !== ((nout % 2) ? e[W +: W] : e[0 +: W])) begin
        failures++;
        if (failures < 10) $display("out %0d: got %h", nout, m_data);
      end
      nout <= nout + 1;
      if (full_rate) outs_fast <= outs_fast + 1;
    end
  end

  // producer: offers word pn, holds it until taken
  bit took = 0;
  int pn = 0;
  always @(posedge clk) begin
    took = !rst && s_valid && s_ready;
    if (took) pn++;
  end
  always @(negedge clk) begin
    if (!rst) begin
      if (!s_valid || took) begin
        s_valid = full_rate ? 1'b1 : ($urandom_range(0, 2) != 0);
        s_data  = word(pn);
      end
      m_ready = full_rate ? 1'b1 : ($urandom_range(0, 2) != 0);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (20000) @(posedge clk);
    @(negedge clk);
    full_rate = 1;
    repeat (20) @(posedge clk);
    outs_fast = 0;
    repeat (1000) @(posedge clk);
    checks++;
    $display("full-rate outputs in 1000 cycles: %0d", outs_fast);
    if (outs_fast != 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
