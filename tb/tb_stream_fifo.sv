// tb_stream_fifo: self-checking test of the synchronous stream FIFO.
// Random producer and consumer; every word must come out once and in order,
// count must equal the number of words held and afull must be set exactly
// when count >= DEPTH-1. A full phase (consumer stopped) checks that the
// FIFO holds exactly DEPTH words and then refuses more.
module tb_stream_fifo;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned WIDTH = 16, DEPTH = 8;
  logic clk = 1'b0, rst = 1'b1;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0, afull;
  logic [WIDTH-1:0] s_data = '0, m_data;
  logic [3:0] count;
  int unsigned checks = 0, failures = 0;
  logic [WIDTH-1:0] model [$];
  int unsigned in_pct = 50, out_pct = 50;
  bit took = 0;

  always #5 clk = ~clk;
  stream_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always @(posedge clk) if (!rst) begin
    checks++;
    if (count != 4'(model.size()) || afull != (model.size() >= DEPTH - 1) ||
        m_valid != (model.size() != 0) || s_ready != (model.size() != DEPTH)) begin
      failures++;
      if (failures < 10) $display("flags: count %0d model %0d afull %b", count, model.size(), afull);
    end
    if (m_valid && m_ready) begin
      automatic logic [WIDTH-1:0] w = model.pop_front();
      checks++;
      if (m_data !== w) begin failures++; $display("data %h want %h", m_data, w); end
    end
    if (s_valid && s_ready) model.push_back(s_data);
    took = s_valid && s_ready;
  end

  always @(negedge clk) if (!rst) begin
    if (!s_valid || took) begin
      s_valid <= ($urandom_range(99) < in_pct);
      s_data  <= WIDTH'($urandom);
    end
    m_ready <= ($urandom_range(99) < out_pct);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3000) @(posedge clk);
    in_pct = 100; out_pct = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (count != 4'(DEPTH) || s_ready) begin failures++; $display("did not fill to DEPTH"); end
    in_pct = 0; out_pct = 100;
    repeat (40) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
