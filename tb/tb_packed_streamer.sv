// tb_packed_streamer: self-checking test of the FCMP packed weight streamer in
// its default 4-buffer, two-port arrangement.
//
// Loads the RAM with random words through the configuration port, then
// streams. Phase 1 keeps every consumer ready and checks the rate: each
// buffer must deliver one word per two memory cycles (one per compute cycle
// at R_F = 2). Phase 2 throttles the consumers at random, stream 1 the most,
// which makes its FIFO go almost-full and its read slots go to the other
// buffer of the same port; the test counts those redistributions. In both
// phases every word is compared with the RAM image: buffer i must repeat
// words BASE[i] .. BASE[i]+LEN[i]-1 in order.
module tb_packed_streamer;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned WIDTH = 18;
  localparam int unsigned NBUF  = 4;
  localparam int unsigned LEN   = 256;

  logic clk = 1'b0, rst = 1'b1, run = 1'b0;
  logic cfg_we = 1'b0;
  logic [9:0] cfg_addr = '0;
  logic [WIDTH-1:0] cfg_data = '0;
  logic [NBUF-1:0] out_valid, out_ready, afull;
  logic [NBUF-1:0][WIDTH-1:0] out_data;
  logic [1:0] slot_redistributed;

  always #2.5 clk = ~clk;

  packed_streamer dut (.*);

  logic [WIDTH-1:0] image [1024];
  int unsigned checks = 0, failures = 0;
  int unsigned idx [NBUF];
  int unsigned got [NBUF];
  int unsigned redistributions = 0;
  int unsigned ready_pct [NBUF];
  bit counting = 1'b0;

  // scoreboard
  always @(posedge clk) begin
    if (!rst) begin
      for (int i = 0; i < NBUF; i++) begin
        if (out_valid[i] && out_ready[i]) begin
          checks++;
          if (out_data[i] !== image[i*LEN + idx[i]]) begin
            failures++;
            if (failures < 10)
              $display("mismatch stream %0d word %0d: got %h want %h", i, idx[i], out_data[i],
                       image[i*LEN + idx[i]]);
          end
          idx[i] = (idx[i] + 1) % LEN;
          if (counting) got[i]++;
        end
      end
      if (slot_redistributed != 2'b00) redistributions++;
    end
  end

  // consumers
  always @(negedge clk) begin
    for (int i = 0; i < NBUF; i++) out_ready[i] <= ($urandom_range(99) < ready_pct[i]);
  end

  initial begin
    for (int i = 0; i < NBUF; i++) begin idx[i] = 0; got[i] = 0; ready_pct[i] = 100; end
    for (int a = 0; a < 1024; a++) image[a] = WIDTH'($urandom);
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      cfg_we <= 1'b1; cfg_addr <= 10'(a); cfg_data <= image[a];
    end
    @(negedge clk);
    cfg_we <= 1'b0;
    run <= 1'b1;
    // phase 1: full rate
    repeat (50) @(posedge clk);
    counting = 1'b1;
    repeat (1000) @(posedge clk);
    counting = 1'b0;
    for (int i = 0; i < NBUF; i++) begin
      checks++;
      if (got[i] < 498 || got[i] > 501) begin
        failures++;
        $display("rate: stream %0d delivered %0d words in 1000 cycles, want 500", i, got[i]);
      end
    end
    checks++;
    if (redistributions != 0) begin
      failures++;
      $display("slots redistributed with all consumers ready");
    end
    // phase 2: random backpressure, stream 1 slowest
    ready_pct[0] = 40; ready_pct[1] = 10; ready_pct[2] = 60; ready_pct[3] = 30;
    repeat (4000) @(posedge clk);
    ready_pct[0] = 100; ready_pct[1] = 100; ready_pct[2] = 100; ready_pct[3] = 100;
    repeat (100) @(posedge clk);
    checks++;
    if (redistributions == 0) begin
      failures++;
      $display("no read slot was ever redistributed");
    end
    $display("redistributed slots: %0d", redistributions);
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
