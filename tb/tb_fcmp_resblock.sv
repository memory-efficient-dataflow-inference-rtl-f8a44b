// tb_fcmp_resblock: end-to-end test of the FCMP residual block at its default
// size (256 channels in and out, 64 in the middle, PE = 4, SIMD = 16, binary
// weights), with the memory clock at twice the compute clock (R_F = 2).
//
// Random binary weights are written into both packed weight RAMs and random
// sorted thresholds into the three threshold units; then NPIX random 4-bit
// pixels are streamed through. A behavioural reference computes, per pixel,
// thresholding -> 1x1 conv (256->64, 2-bit) -> 1x1 conv (64->256, 4-bit) ->
// saturating add with the input, and every output channel is compared.
// The first part of the stream runs with the output always ready and checks
// the rate: one pixel per 257 compute cycles (256 folds + 1), and no cycle in
// which a busy MVAU waits for weights. The second part applies random output
// backpressure. Mechanisms counted (each must occur): output stalls, MVAU
// weight waits at start-up (the streamers are started after the first pixel), read-slot redistribution in a packed RAM, more
// than one pixel held in the bypass FIFO, and saturation in the adder.
module tb_fcmp_resblock;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned C = 256, M = 64, PE = 4, SIMD = 16, NPIX = 24;
  localparam int unsigned SF1 = C / SIMD, NF1 = M / PE, SF3 = M / SIMD, NF3 = C / PE;

  logic clk_c = 0, clk_mem = 0, rst_c = 1, rst_mem = 1, run = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [C*4-1:0] in_data = '0, out_data;
  logic wcfg_we = 0;
  logic [1:0] wcfg_layer = '0;
  logic [9:0] wcfg_addr = '0;
  logic [15:0] wcfg_data = '0;
  logic thr_we = 0;
  logic [1:0] thr_unit = '0;
  logic [7:0] thr_row = '0;
  logic [3:0] thr_idx = '0;
  logic signed [10:0] thr_data = '0;
  logic [1:0][1:0] slot_redistributed;

  always #2.5 clk_mem = ~clk_mem;
  always #5 clk_c = ~clk_c;
  bit took_in = 0;
  always @(posedge clk_c) took_in = in_valid && in_ready;
  fcmp_resblock dut (.*);

  int w1 [M][C];
  int w3 [C][M];
  int t0 [C][3];
  int t1 [M][3];
  int t3 [C][15];
  int xin [NPIX][C];
  int unsigned checks = 0, failures = 0, nout = 0, o_pct = 100;
  int unsigned n_stall = 0, n_wwait = 0, n_wwait_steady = 0, n_redis = 0, n_byp2 = 0, n_sat = 0;
  bit steady = 0;
  longint t_a, t_b;

  task automatic reference(input int p, output int y [C]);
    int t [C];
    int h [M];
    for (int c = 0; c < C; c++) begin
      automatic int n = 0;
      for (int k = 0; k < 3; k++) if (xin[p][c] >= t0[c][k]) n++;
      t[c] = n - 2;
    end
    for (int m = 0; m < M; m++) begin
      automatic int acc = 0, n = 0;
      for (int c = 0; c < C; c++) acc += w1[m][c] * t[c];
      for (int k = 0; k < 3; k++) if (acc >= t1[m][k]) n++;
      h[m] = n - 2;
    end
    for (int c = 0; c < C; c++) begin
      automatic int acc = 0, n = 0, s;
      for (int m = 0; m < M; m++) acc += w3[c][m] * h[m];
      for (int k = 0; k < 15; k++) if (acc >= t3[c][k]) n++;
      s = xin[p][c] + (n - 8);
      if (s > 7 || s < -8) n_sat++;
      y[c] = s > 7 ? 7 : (s < -8 ? -8 : s);
    end
  endtask

  always @(posedge clk_c) if (!rst_c) begin
    if (out_valid && !out_ready) n_stall++;
    if (dut.u_conv1.u_mvau.busy && !dut.u_conv1.u_mvau.w_valid) begin
      n_wwait++;
      if (steady) n_wwait_steady++;
    end
    if (dut.u_conv3.u_mvau.busy && !dut.u_conv3.u_mvau.w_valid) begin
      n_wwait++;
      if (steady) n_wwait_steady++;
    end
    if (dut.g_type_b.u_bypass.count >= 2) n_byp2++;
    if (out_valid && out_ready) begin
      automatic int y [C];
      reference(nout, y);
      for (int c = 0; c < C; c++) begin
        automatic logic signed [3:0] o = out_data[c*4 +: 4];
        checks++;
        if (int'(o) != y[c]) begin
          failures++;
          if (failures < 10) $display("pixel %0d ch %0d: got %0d want %0d", nout, c, o, y[c]);
        end
      end
      if (nout == 4) t_a = $time;
      if (nout == 10) t_b = $time;
      nout++;
    end
  end
  always @(posedge clk_mem) if (!rst_mem && slot_redistributed != '0) n_redis++;
  always @(negedge clk_c) out_ready <= $urandom_range(99) < o_pct;

  function automatic void sorted_thresholds(ref int th [15], input int n, input int lo, input int hi);
    for (int k = 0; k < n; k++) th[k] = lo + int'($urandom_range(hi - lo));
    for (int i = 0; i < n; i++) for (int j = 0; j + 1 < n - i; j++)
      if (th[j] > th[j+1]) begin automatic int tmp = th[j]; th[j] = th[j+1]; th[j+1] = tmp; end
  endfunction

  initial begin
    int th [15];
    for (int m = 0; m < M; m++) for (int c = 0; c < C; c++) w1[m][c] = $urandom_range(1) ? 1 : -1;
    for (int c = 0; c < C; c++) for (int m = 0; m < M; m++) w3[c][m] = $urandom_range(1) ? 1 : -1;
    for (int c = 0; c < C; c++) begin
      sorted_thresholds(th, 3, -6, 5);
      for (int k = 0; k < 3; k++) t0[c][k] = th[k];
      sorted_thresholds(th, 15, -24, 24);
      for (int k = 0; k < 15; k++) t3[c][k] = th[k];
    end
    for (int m = 0; m < M; m++) begin
      sorted_thresholds(th, 3, -30, 30);
      for (int k = 0; k < 3; k++) t1[m][k] = th[k];
    end
    for (int p = 0; p < NPIX; p++) for (int c = 0; c < C; c++) xin[p][c] = int'($urandom_range(15)) - 8;

    repeat (4) @(posedge clk_c);
    rst_c = 0; rst_mem = 0;
    // weights: PE p of a layer at RAM address 256p + nf*SF + sf
    for (int L = 0; L < 2; L++)
      for (int p = 0; p < PE; p++)
        for (int w = 0; w < 256; w++) begin
          automatic int sf_n = (L == 0) ? SF1 : SF3;
          automatic int nf = w / sf_n, sf = w % sf_n;
          @(negedge clk_mem);
          wcfg_we <= 1; wcfg_layer <= 2'(L); wcfg_addr <= 10'(p * 256 + w);
          for (int s = 0; s < SIMD; s++)
            wcfg_data[s] <= (L == 0) ? (w1[nf * PE + p][sf * SIMD + s] > 0)
                                     : (w3[nf * PE + p][sf * SIMD + s] > 0);
        end
    @(negedge clk_mem); wcfg_we <= 0;
    for (int c = 0; c < C; c++) for (int k = 0; k < 3; k++) begin
      @(negedge clk_c); thr_we <= 1; thr_unit <= 0; thr_row <= 8'(c); thr_idx <= 4'(k); thr_data <= 11'(t0[c][k]);
    end
    for (int m = 0; m < M; m++) for (int k = 0; k < 3; k++) begin
      @(negedge clk_c); thr_we <= 1; thr_unit <= 1; thr_row <= 8'(m); thr_idx <= 4'(k); thr_data <= 11'(t1[m][k]);
    end
    for (int c = 0; c < C; c++) for (int k = 0; k < 15; k++) begin
      @(negedge clk_c); thr_we <= 1; thr_unit <= 2; thr_row <= 8'(c); thr_idx <= 4'(k); thr_data <= 11'(t3[c][k]);
    end
    @(negedge clk_c); thr_we <= 0;

    fork
      for (int p = 0; p < NPIX; p++) begin
        automatic logic [C*4-1:0] v;
        for (int c = 0; c < C; c++) v[c*4 +: 4] = 4'(xin[p][c]);
        @(negedge clk_c);
        in_valid <= 1;
        in_data  <= v;
        do @(negedge clk_c); while (!took_in);
        in_valid <= 0;
      end
      begin
        // start the weight streamers only after the first pixel has arrived,
        // so that the MVAUs have to wait for their weights once
        wait (dut.u_conv1.u_mvau.busy);
        repeat (20) @(posedge clk_c);
        @(negedge clk_mem); run <= 1;
      end
      begin
        wait (nout == 3);
        steady = 1;
        wait (nout == 11);
        steady = 0;
        o_pct = 5;
      end
    join
    wait (nout == NPIX);

    checks++;
    if ((t_b - t_a) / 10 != 6 * (NF1 * SF1 + 1)) begin
      failures++;
      $display("rate: 6 pixels in %0d compute cycles, want %0d", (t_b - t_a) / 10, 6 * (NF1 * SF1 + 1));
    end
    checks++;
    if (n_wwait_steady != 0) begin failures++; $display("MVAU waited %0d cycles for weights in steady state", n_wwait_steady); end
    $display("mechanisms: output stalls %0d, weight waits %0d, slot redistributions %0d, bypass>=2 %0d, saturations %0d",
             n_stall, n_wwait, n_redis, n_byp2, n_sat);
    checks++; if (n_stall == 0) begin failures++; $display("no output stall"); end
    checks++; if (n_wwait == 0) begin failures++; $display("no weight wait"); end
    checks++; if (n_redis == 0) begin failures++; $display("no slot redistribution"); end
    checks++; if (n_byp2 == 0) begin failures++; $display("bypass FIFO never held 2 pixels"); end
    checks++; if (n_sat == 0) begin failures++; $display("adder never saturated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk_c);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
