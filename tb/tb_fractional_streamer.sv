// tb_fractional_streamer: self-checking test of the R_F = 1.5 packing of
// three buffers (buffer 1 split into ODD/EVEN halves on different ports).
//
// The RAM is loaded with a distinct tag per logical word, laid out as the
// streamer expects. Each of the three streams is then drained by a consumer
// that takes a word on two of every three memory cycles, i.e. one word per
// compute cycle at R_F = 1.5. Checks: every word arrives in its logical order
// with the right value, each stream sustains the 2/3 rate (no consumer ever
// waits after start-up), and slot redistribution actually happens. A second
// phase throttles stream 0 randomly and checks order is still kept.
module tb_fractional_streamer;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned W = 18, LEN = 340, HALF = LEN / 2;

  logic clk = 0, rst = 1, run = 0;
  always #2 clk = ~clk;

  logic cfg_we = 0;
  logic [9:0] cfg_addr = 0;
  logic [W-1:0] cfg_data = 0;
  logic [2:0] out_valid, out_ready;
  logic [2:0][W-1:0] out_data;
  logic [1:0] slot_redistributed;

  fractional_streamer dut (.*);

  int checks = 0, failures = 0;
  int idx [3];
  int waits [3];
  int redist = 0;
  int phase = 0;
  int cyc = 0;

  function automatic logic [W-1:0] tag(int b, int k);
    return W'((b << 12) | k);
  endfunction

  // consumers: stream s ready on 2 of 3 cycles (phase 1), random for stream 0 in phase 2
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (slot_redistributed != 0) redist <= redist + 1;
    for (int s = 0; s < 3; s++) begin
      if (out_ready[s]) begin
        if (out_valid[s]) begin
          checks++;
          if (out_data[s] !== tag(s, idx[s])) begin
            failures++;
            if (failures < 10) $display("stream %0d word %0d: got %h expected %h", s, idx[s], out_data[s], tag(s, idx[s]));
          end
          idx[s] <= (idx[s] == LEN - 1) ? 0 : idx[s] + 1;
        end else if (phase == 1) waits[s] <= waits[s] + 1;
      end
    end
  end

  always_comb begin
    for (int s = 0; s < 3; s++) out_ready[s] = (phase != 0) && ((cyc % 3) != 2);
    if (phase == 2) out_ready[0] = ($urandom_range(0, 3) == 0);
  end

  initial begin
    #2000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    int start_idx [3];
    idx = '{0, 0, 0};
    waits = '{0, 0, 0};
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < LEN; k++) begin
      for (int b = 0; b < 3; b++) begin
        @(negedge clk);
        cfg_we = 1;
        cfg_data = tag(b, k);
        if (b == 0) cfg_addr = 10'(k);
        else if (b == 2) cfg_addr = 10'(2 * LEN + k);
        else cfg_addr = (k % 2) ? 10'(LEN + k / 2) : 10'(LEN + HALF + k / 2);
      end
    end
    @(negedge clk) cfg_we = 0;
    run = 1;
    repeat (20) @(posedge clk);
    phase = 1;
    repeat (30) @(posedge clk);
    waits = '{0, 0, 0};
    redist = 0;
    start_idx = idx;
    repeat (3000) @(posedge clk);
    for (int s = 0; s < 3; s++) begin
      automatic int got = (idx[s] - start_idx[s] + 10 * LEN) % LEN;
      checks++;
      if (waits[s] != 0) begin
        failures++;
        $display("stream %0d: consumer waited %0d times in steady state", s, waits[s]);
      end
      $display("stream %0d: %0d words mod LEN in 3000 cycles (2000 expected), waits %0d", s, got, waits[s]);
      checks++;
      if (got != 2000 % LEN) begin failures++; $display("stream %0d rate wrong", s); end
    end
    checks++;
    $display("slot redistributions: %0d", redist);
    if (redist == 0) begin failures++; $display("no slot redistribution seen"); end
    phase = 2;
    repeat (4000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
