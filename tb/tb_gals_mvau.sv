// tb_gals_mvau: self-checking test of one decoupled (GALS) MVAU layer at a
// reduced size (MW = 64, SIMD = 16, binary weights), in two configurations
// built side by side:
//   g = 0: PE = 4, MH = 16, bin height 4, memory clock 2x compute (R_F = 2)
//   g = 1: PE = 3, MH = 12, bin height 3, memory clock 1.5x compute
//          (R_F = 1.5, buffer 1 stored as ODD/EVEN halves)
// Each PE buffer holds NF*SF = 16 words. Weights are written into the RAM in
// the packed layout, thresholds and inputs are random. Every output row is
// checked against a direct matrix-vector product. Phase 1 streams vectors
// back to back and checks the rate: one vector per NF*SF + 1 compute cycles,
// i.e. the packed memory keeps all PEs busy. Phase 2 adds random
// backpressure.
module tb_gals_mvau;
  timeunit 1ns; timeprecision 1ps;

  int unsigned all_checks = 0, all_failures = 0, ndone = 0;

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int unsigned MW = 64, PE = g ? 3 : 4, MH = 4 * PE, BH = PE, SIMD = 16, SF = MW / SIMD, NF = MH / PE;
    localparam int unsigned NT = 3, ACCW = $clog2(MW) + 3, LEN = NF * SF, NVEC = 60;

    logic clk_mem = 0, clk_c = 0, rst_mem = 1, rst_c = 1, run = 0;
    logic wcfg_we = 0;
    logic [0:0] wcfg_ram = '0;
    logic [9:0] wcfg_addr = '0;
    logic [15:0] wcfg_data = '0;
    logic [0:0][1:0] slot_redistributed;
    logic in_valid = 0, in_ready, out_valid, out_ready = 1;
    logic [MW*2-1:0] in_data = '0;
    logic [MH*2-1:0] out_data;
    logic thr_we = 0;
    logic [3:0] thr_row = '0;
    logic [1:0] thr_idx = '0;
    logic signed [ACCW-1:0] thr_data = '0;

    always #(g ? 10.0 / 3.0 : 2.5) clk_mem = ~clk_mem;
    always #5 clk_c = ~clk_c;
    bit took_in = 0;
    always @(posedge clk_c) took_in = in_valid && in_ready;
    gals_mvau #(.MW(MW), .MH(MH), .PE(PE), .SIMD(SIMD), .BIN_HEIGHT(BH)) dut (.*);

    int wmat [MH][MW];
    int thr [MH][NT];
    int xin [NVEC][MW];
    int unsigned checks = 0, failures = 0, nout = 0, o_pct = 100;
    longint t_first, t_last;

    always @(posedge clk_c) if (!rst_c && out_valid && out_ready) begin
      for (int r = 0; r < MH; r++) begin
        automatic int acc = 0, cnt = 0;
        for (int j = 0; j < MW; j++) acc += wmat[r][j] * xin[nout][j];
        for (int k = 0; k < NT; k++) if (acc >= thr[r][k]) cnt++;
        checks++;
        if ($signed(out_data[r*2 +: 2]) != cnt - 2) begin
          failures++;
          if (failures < 10) $display("config %0d vec %0d row %0d: got %0d want %0d", g, nout, r, $signed(out_data[r*2 +: 2]), cnt - 2);
        end
      end
      if (nout == 4) t_first = $time;
      if (nout == 24) t_last = $time;
      nout++;
    end
    always @(negedge clk_c) out_ready <= $urandom_range(99) < o_pct;

    initial begin
      for (int r = 0; r < MH; r++) for (int j = 0; j < MW; j++) wmat[r][j] = $urandom_range(1) ? 1 : -1;
      for (int r = 0; r < MH; r++) begin
        thr[r][0] = int'($urandom_range(16)) - 12;
        thr[r][1] = thr[r][0] + int'($urandom_range(8));
        thr[r][2] = thr[r][1] + int'($urandom_range(8));
      end
      for (int v = 0; v < NVEC; v++) for (int j = 0; j < MW; j++) xin[v][j] = int'($urandom_range(3)) - 2;
      repeat (4) @(posedge clk_c);
      rst_mem = 0; rst_c = 0;
      for (int p = 0; p < PE; p++) for (int w = 0; w < LEN; w++) begin
        automatic int unsigned nf = w / SF, sf = w % SF;
        @(negedge clk_mem);
        wcfg_we <= 1; wcfg_addr <= (BH == 3 && p == 1) ? 10'(LEN + ((w % 2) ? 0 : LEN / 2) + w / 2) : 10'(p * LEN + w);
        for (int s = 0; s < SIMD; s++) wcfg_data[s] <= wmat[nf * PE + p][sf * SIMD + s] > 0;
      end
      @(negedge clk_mem); wcfg_we <= 0; run <= 1;
      for (int r = 0; r < MH; r++) for (int k = 0; k < NT; k++) begin
        @(negedge clk_c); thr_we <= 1; thr_row <= 4'(r); thr_idx <= 2'(k); thr_data <= ACCW'(thr[r][k]);
      end
      @(negedge clk_c); thr_we <= 0;
      for (int v = 0; v < NVEC; v++) begin
        if (v == 30) o_pct = 40;
        @(negedge clk_c);
        in_valid <= 1;
        for (int j = 0; j < MW; j++) in_data[j*2 +: 2] <= 2'(xin[v][j]);
        do @(negedge clk_c); while (!took_in);
        in_valid <= 0;
      end
      wait (nout == NVEC);
      checks++;
      if ((t_last - t_first) / 10 != 20 * (LEN + 1)) begin
        failures++;
        $display("config %0d rate: 20 vectors in %0d cycles, want %0d", g, (t_last - t_first) / 10, 20 * (LEN + 1));
      end
      $display("config %0d (PE %0d, bin height %0d): %0d checks, %0d failures", g, PE, BH, checks, failures);
      all_checks += checks; all_failures += failures; ndone++;
    end
  end

  initial begin
    wait (ndone == 2);
    $display("TB_RESULT checks=%0d failures=%0d", all_checks, all_failures);
    $finish;
  end
  initial begin
    #400000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", all_checks, all_failures + 1);
    $finish;
  end
endmodule
