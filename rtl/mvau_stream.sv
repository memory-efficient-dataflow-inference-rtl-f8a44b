// mvau_stream: matrix-vector-activation unit (MVAU) whose weights arrive as a
// stream instead of from local memory: the compute half of a decoupled MVAU.
//
// It multiplies an MH x MW weight matrix by an input vector of MW signed
// ABITS activations and passes each of the MH sums through a per-row
// multi-threshold activation. The work is folded: PE rows are computed in
// parallel, each PE multiplies SIMD input elements per cycle, so one vector
// takes NF = MH/PE neuron folds of SF = MW/SIMD synapse folds, one fold per
// clock when weights are available. PE p computes rows nf*PE + p.
// The weight beat is cut into one SIMD*WBITS word per PE (the stream
// splitter); element s of a word sits at bits [s*WBITS +: WBITS]. Binary
// weights (WBITS = 1) mean 1 -> +1, 0 -> -1; wider weights are signed.
// The activation of a row is the number of its NT = 2^OBITS - 1 ascending
// thresholds that the sum reaches (sum >= T[k]), minus 2^(OBITS-1), so the
// output is a signed OBITS value.
// Interface: in_* takes a whole vector (element j at [j*ABITS +: ABITS]);
// w_* is the weight stream; out_* gives the whole MH-row result (row r at
// [r*OBITS +: OBITS]); thr_* writes threshold T[thr_idx] of row thr_row.
// Timing: a vector is accepted when the unit is idle; its result appears
// NF*SF weight beats later, in the cycle after the last fold. The next vector
// can be accepted in the cycle after that.
module mvau_stream #(
  parameter int unsigned MW    = 256,
  parameter int unsigned MH    = 64,
  parameter int unsigned PE    = 4,
  parameter int unsigned SIMD  = 16,
  parameter int unsigned WBITS = 1,
  parameter int unsigned ABITS = 2,
  parameter int unsigned OBITS = 2,
  localparam int unsigned SF   = MW / SIMD,
  localparam int unsigned NF   = MH / PE,
  localparam int unsigned NT   = (1 << OBITS) - 1,
  localparam int unsigned ACCW = $clog2(MW) + ABITS + 1,
  localparam int unsigned WW   = SIMD * WBITS,
  localparam int unsigned RBW  = (MH > 1) ? $clog2(MH) : 1,
  localparam int unsigned TBW  = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned SFW  = (SF > 1) ? $clog2(SF) : 1,
  localparam int unsigned NFW  = (NF > 1) ? $clog2(NF) : 1
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [MW*ABITS-1:0]    in_data,
  input  logic                   w_valid,
  output logic                   w_ready,
  input  logic [PE*WW-1:0]       w_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [MH*OBITS-1:0]    out_data,
  input  logic                   thr_we,
  input  logic [RBW-1:0]         thr_row,
  input  logic [TBW-1:0]         thr_idx,
  input  logic signed [ACCW-1:0] thr_data
);

  logic signed [ACCW-1:0] thr [MH][NT];

  always_ff @(posedge clk) begin
    if (thr_we) thr[thr_row][thr_idx] <= thr_data;
  end

  logic                     busy;
  logic [NFW-1:0]           nf;
  logic [SFW-1:0]           sf;
  logic [MW*ABITS-1:0]      x;
  logic signed [ACCW-1:0]   acc [PE];
  logic [MH*OBITS-1:0]      y;       // results of the folds done so far

  logic last_sf, last_nf, out_free, step;
  assign last_sf  = (sf == SFW'(SF - 1));
  assign last_nf  = (nf == NFW'(NF - 1));
  assign out_free = !out_valid || out_ready;
  assign step     = busy && w_valid && (!(last_sf && last_nf) || out_free);
  assign w_ready  = step;
  assign in_ready = !busy;

  // stream splitter + PE datapaths
  logic signed [ACCW-1:0] acc_next [PE];
  logic [OBITS-1:0]       act      [PE];
  logic [MH*OBITS-1:0]    y_next;

  always_comb begin
    y_next = y;
    for (int p = 0; p < PE; p++) begin
      automatic logic signed [ACCW-1:0] dot = '0;
      automatic int unsigned cnt = 0;
      automatic int unsigned row = int'(nf) * PE + p;
      for (int s = 0; s < SIMD; s++) begin
        automatic logic signed [ABITS-1:0] a = x[(int'(sf) * SIMD + s) * ABITS +: ABITS];
        automatic logic [WBITS-1:0] w = w_data[p * WW + s * WBITS +: WBITS];
        if (WBITS == 1) dot = w[0] ? dot + ACCW'(a) : dot - ACCW'(a);
        else            dot = dot + ACCW'(a) * ACCW'($signed(w));
      end
      acc_next[p] = (sf == '0) ? dot : acc[p] + dot;
      for (int k = 0; k < NT; k++) if (acc_next[p] >= thr[row][k]) cnt++;
      act[p] = OBITS'(cnt) - OBITS'(1 << (OBITS - 1));
      y_next[row * OBITS +: OBITS] = act[p];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      nf        <= '0;
      sf        <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (!busy) begin
        if (in_valid) begin
          busy <= 1'b1;
          x    <= in_data;
          nf   <= '0;
          sf   <= '0;
        end
      end else if (step) begin
        for (int p = 0; p < PE; p++) acc[p] <= acc_next[p];
        if (last_sf) begin
          y  <= y_next;
          sf <= '0;
          if (last_nf) begin
            busy      <= 1'b0;
            out_valid <= 1'b1;
            out_data  <= y_next;
            nf        <= '0;
          end else begin
            nf <= nf + 1'b1;
          end
        end else begin
          sf <= sf + 1'b1;
        end
      end
    end
  end

endmodule
