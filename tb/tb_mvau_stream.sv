// tb_mvau_stream: self-checking test of the streaming MVAU, for binary
// (WBITS = 1) and ternary (WBITS = 2) weights, at a reduced size
// (MW = 32, MH = 8, PE = 4, SIMD = 8, 2-bit inputs, 2-bit outputs).
// Random weight matrices, random sorted thresholds, random inputs. The
// reference computes each row's dot product directly from the matrix and
// counts thresholds reached. The weight stream is produced from the matrix
// in the order the MVAU consumes it (the stream splitter's layout). With
// weights always available, the result of a vector must be taken exactly
// NF*SF + 1 clock edges after the vector was accepted.
module tb_mvau_stream;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned MW = 32, MH = 8, PE = 4, SIMD = 8, ABITS = 2, OBITS = 2;
  localparam int unsigned SF = MW / SIMD, NF = MH / PE, NT = 3, ACCW = $clog2(MW) + ABITS + 1;
  localparam int unsigned NVEC = 40;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  bit [1:0] done = '0;

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int unsigned WB = g + 1;
    logic in_valid = 0, in_ready, w_valid = 0, w_ready, out_valid, out_ready = 1;
    logic [MW*ABITS-1:0] in_data = '0;
    logic [PE*SIMD*WB-1:0] w_data = '0;
    logic [MH*OBITS-1:0] out_data;
    logic thr_we = 0;
    logic [2:0] thr_row = '0;
    logic [1:0] thr_idx = '0;
    logic signed [ACCW-1:0] thr_data = '0;

    mvau_stream #(.MW(MW), .MH(MH), .PE(PE), .SIMD(SIMD), .WBITS(WB), .ABITS(ABITS), .OBITS(OBITS))
      dut (.*);

    int wmat [MH][MW];
    int thr [MH][NT];
    int xin [NVEC][MW];
    int unsigned beat = 0, nout = 0, w_pct = 100, o_pct = 100;
    longint t_acc, t_out;

    function automatic logic [WB-1:0] wenc(int v);
      if (WB == 1) return (v > 0) ? 1'b1 : 1'b0;
      else return WB'(v);
    endfunction

    // weight stream: beat b -> nf = (b / SF) % NF, sf = b % SF
    always @(negedge clk) begin
      if (!w_valid || w_ready) begin
        automatic int unsigned b = beat % (NF * SF);
        w_valid <= ($urandom_range(99) < w_pct);
        for (int p = 0; p < PE; p++)
          for (int s = 0; s < SIMD; s++)
            w_data[(p*SIMD + s)*WB +: WB] <= wenc(wmat[(b / SF) * PE + p][(b % SF) * SIMD + s]);
      end
      out_ready <= ($urandom_range(99) < o_pct);
    end
    always @(posedge clk) if (w_valid && w_ready) beat++;

    always @(posedge clk) if (!rst && in_valid && in_ready) t_acc = $time;

    always @(posedge clk) if (!rst && out_valid && out_ready) begin
      for (int r = 0; r < MH; r++) begin
        automatic int acc = 0, cnt = 0;
        for (int j = 0; j < MW; j++) acc += wmat[r][j] * xin[nout][j];
        for (int k = 0; k < NT; k++) if (acc >= thr[r][k]) cnt++;
        checks++;
        if ($signed(out_data[r*OBITS +: OBITS]) != cnt - 2) begin
          failures++;
          if (failures < 10) $display("W%0d vec %0d row %0d: got %0d want %0d (acc %0d)", WB, nout, r,
                                      $signed(out_data[r*OBITS +: OBITS]), cnt - 2, acc);
        end
      end
      nout++;
    end

    // latency check when weights and output are always available
    always @(posedge clk) if (!rst && out_valid && w_pct == 100 && o_pct == 100 && nout < 10) begin
      t_out = $time;
    end

    initial begin
      for (int r = 0; r < MH; r++) for (int j = 0; j < MW; j++)
        wmat[r][j] = (WB == 1) ? ($urandom_range(1) ? 1 : -1) : int'($urandom_range(2)) - 1;
      for (int r = 0; r < MH; r++) begin
        automatic int t0 = int'($urandom_range(12)) - 8;
        thr[r][0] = t0; thr[r][1] = t0 + int'($urandom_range(6)); thr[r][2] = thr[r][1] + int'($urandom_range(6));
      end
      for (int v = 0; v < NVEC; v++) for (int j = 0; j < MW; j++) xin[v][j] = int'($urandom_range(3)) - 2;
      repeat (3) @(posedge clk);
      rst <= 0;
      for (int r = 0; r < MH; r++) for (int k = 0; k < NT; k++) begin
        @(negedge clk); thr_we <= 1; thr_row <= 3'(r); thr_idx <= 2'(k); thr_data <= ACCW'(thr[r][k]);
      end
      @(negedge clk); thr_we <= 0;
      for (int v = 0; v < NVEC; v++) begin
        if (v == 10) begin w_pct = 50; o_pct = 60; end
        @(negedge clk);
        in_valid <= 1;
        for (int j = 0; j < MW; j++) in_data[j*ABITS +: ABITS] <= ABITS'(xin[v][j]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk); in_valid <= 0;
        if (v < 9) begin
          // at full rate: NF*SF fold cycles, then the result is taken one edge later
          @(posedge clk); while (!out_valid) @(posedge clk);
          checks++;
          if (($time - t_acc) / 10 != NF * SF + 1) begin
            failures++;
            $display("W%0d latency %0d cycles, want %0d", WB, ($time - t_acc) / 10, NF * SF + 1);
          end
        end
      end
      while (nout < NVEC) @(posedge clk);
      done[g] = 1;
    end
  end

  initial begin
    wait (done == 2'b11);
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
