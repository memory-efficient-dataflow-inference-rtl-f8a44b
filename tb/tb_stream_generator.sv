// tb_stream_generator: self-checking test of the weight stream generator at
// its defaults: 4 PE buffers of 256 16-bit words packed in one RAM.
// The RAM image is random; beat k of the merged stream must hold word
// (k mod 256) of every PE buffer, PE p in bits [16p +: 16]. With the consumer
// always ready the generator must sustain one beat per two memory cycles
// (one per compute cycle at R_F = 2); with random backpressure the data must
// stay correct.
module tb_stream_generator;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned PE = 4, WW = 16, LEN = 256;
  logic clk = 0, rst = 1, run = 0;
  logic cfg_we = 0;
  logic [0:0] cfg_ram = '0;
  logic [9:0] cfg_addr = '0;
  logic [WW-1:0] cfg_data = '0;
  logic w_valid, w_ready = 0;
  logic [PE*WW-1:0] w_data;
  logic [0:0][1:0] slot_redistributed;
  logic [WW-1:0] image [1024];
  int unsigned checks = 0, failures = 0, k = 0, got = 0, ready_pct = 100;
  bit counting = 0;

  always #2.5 clk = ~clk;
  stream_generator dut (.*);

  always @(posedge clk) if (!rst && w_valid && w_ready) begin
    checks++;
    for (int p = 0; p < PE; p++)
      if (w_data[p*WW +: WW] !== image[p*LEN + k]) begin
        failures++;
        if (failures < 10) $display("beat %0d PE %0d: %h want %h", k, p, w_data[p*WW +: WW], image[p*LEN+k]);
      end
    k = (k + 1) % LEN;
    if (counting) got++;
  end
  always @(negedge clk) w_ready <= ($urandom_range(99) < ready_pct);

  initial begin
    for (int a = 0; a < 1024; a++) image[a] = WW'($urandom);
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); cfg_we <= 1; cfg_addr <= 10'(a); cfg_data <= image[a];
    end
    @(negedge clk); cfg_we <= 0; run <= 1;
    repeat (50) @(posedge clk);
    counting = 1;
    repeat (2000) @(posedge clk);
    counting = 0;
    checks++;
    if (got < 995 || got > 1001) begin failures++; $display("rate: %0d beats in 2000 cycles", got); end
    ready_pct = 30;
    repeat (3000) @(posedge clk);
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
