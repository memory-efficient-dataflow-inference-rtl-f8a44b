// tb_async_fifo: self-checking test of the dual-clock stream FIFO.
// Source on a 5 ns clock, sink on a 7.3 ns clock. Random valid/ready on both
// sides: every word must arrive once and in order. A second phase with the
// source always valid and the sink always ready checks that the sink gets a
// word in (almost) every one of its cycles, i.e. the FIFO does not throttle
// the slower side.
module tb_async_fifo;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned WIDTH = 64;
  logic s_clk = 0, m_clk = 0, s_rst = 1, m_rst = 1;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [WIDTH-1:0] s_data = '0, m_data;
  int unsigned checks = 0, failures = 0, in_pct = 60, out_pct = 60, got = 0;
  bit took = 0, counting = 0;
  logic [WIDTH-1:0] model [$];

  always #2.5 s_clk = ~s_clk;
  always #3.65 m_clk = ~m_clk;
  async_fifo dut (.*);

  always @(posedge s_clk) begin
    took = s_valid && s_ready;
    if (took) model.push_back(s_data);
  end
  always @(negedge s_clk) if (!s_rst) begin
    if (!s_valid || took) begin
      s_valid <= ($urandom_range(99) < in_pct);
      s_data  <= {$urandom, $urandom};
    end
  end
  always @(posedge m_clk) if (!m_rst) begin
    if (m_valid && m_ready) begin
      automatic logic [WIDTH-1:0] w;
      checks++;
      if (model.size() == 0) begin failures++; $display("word out of nowhere"); end
      else begin
        w = model.pop_front();
        if (m_data !== w) begin failures++; if (failures < 10) $display("got %h want %h", m_data, w); end
      end
      if (counting) got++;
    end
  end
  always @(negedge m_clk) m_ready <= ($urandom_range(99) < out_pct);

  initial begin
    repeat (4) @(posedge m_clk);
    s_rst = 0; m_rst = 0;
    repeat (5000) @(posedge m_clk);
    in_pct = 100; out_pct = 100;
    repeat (50) @(posedge m_clk);
    counting = 1;
    repeat (1000) @(posedge m_clk);
    counting = 0;
    checks++;
    if (got < 990) begin failures++; $display("sink rate %0d / 1000", got); end
    in_pct = 0;
    repeat (50) @(posedge m_clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge m_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
