// tb_tdp_bram: self-checking test of the two-port block RAM.
// Writes random words through port A, then reads random addresses on both
// ports at once and checks each word, and the one-cycle read latency, against
// a shadow array. Also checks read-first behaviour of a write on port A.
module tb_tdp_bram;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned WIDTH = 18, DEPTH = 1024;
  logic clk = 1'b0;
  logic a_en = 0, a_we = 0, b_en = 0;
  logic [9:0] a_addr = '0, b_addr = '0;
  logic [WIDTH-1:0] a_wdata = '0, a_rdata, b_rdata;
  logic [WIDTH-1:0] shadow [DEPTH];
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;
  tdp_bram dut (.*);

  task automatic check(input logic [WIDTH-1:0] got, want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 10) $display("%s: got %h want %h", what, got, want);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      shadow[a] = WIDTH'($urandom);
      @(negedge clk); a_en = 1; a_we = 1; a_addr = 10'(a); a_wdata = shadow[a];
    end
    @(negedge clk); a_we = 0; a_en = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int unsigned ra = $urandom_range(DEPTH - 1), rb = $urandom_range(DEPTH - 1);
      @(negedge clk); a_en = 1; b_en = 1; a_addr = 10'(ra); b_addr = 10'(rb);
      @(negedge clk); a_en = 0; b_en = 0;
      check(a_rdata, shadow[ra], "port A read");
      check(b_rdata, shadow[rb], "port B read");
    end
    // read-first: a write returns the old word, the new word is stored
    @(negedge clk); a_en = 1; a_we = 1; a_addr = 10'd5; a_wdata = ~shadow[5];
    @(negedge clk); a_en = 0; a_we = 0;
    check(a_rdata, shadow[5], "read-first on write");
    shadow[5] = ~shadow[5];
    @(negedge clk); b_en = 1; b_addr = 10'd5;
    @(negedge clk); b_en = 0;
    check(b_rdata, shadow[5], "written word on port B");
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
