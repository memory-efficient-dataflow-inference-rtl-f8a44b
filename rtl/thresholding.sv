// thresholding: stand-alone multi-threshold activation for a vector of C
// channels, as used at the head of a ResBlock branch to requantize the 4-bit
// ResBlock input to the 2-bit activations the convolutions take.
//
// Channel c has NT = 2^OBITS - 1 ascending thresholds; the output is the
// number of thresholds the signed input reaches (x >= T[k]) minus
// 2^(OBITS-1), a signed OBITS value. Thresholds are TW = IBITS + 1 bits wide
// so that a threshold can lie beyond the input range.
// Interface: in_*/out_* carry whole vectors (channel c at [c*BITS +: BITS]);
// thr_* writes threshold thr_idx of channel thr_ch.
// Timing: one register stage; one vector per cycle when out_ready is high.
module thresholding #(
  parameter int unsigned C     = 256,
  parameter int unsigned IBITS = 4,
  parameter int unsigned OBITS = 2,
  localparam int unsigned NT   = (1 << OBITS) - 1,
  localparam int unsigned TW   = IBITS + 1,
  localparam int unsigned CW   = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned TBW  = (NT > 1) ? $clog2(NT) : 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [C*IBITS-1:0]   in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [C*OBITS-1:0]   out_data,
  input  logic                 thr_we,
  input  logic [CW-1:0]        thr_ch,
  input  logic [TBW-1:0]       thr_idx,
  input  logic signed [TW-1:0] thr_data
);

  logic signed [TW-1:0] thr [C][NT];

  always_ff @(posedge clk) begin
    if (thr_we) thr[thr_ch][thr_idx] <= thr_data;
  end

  logic [C*OBITS-1:0] q;

  always_comb begin
    for (int c = 0; c < C; c++) begin
      automatic logic signed [TW-1:0] v = TW'($signed(in_data[c*IBITS +: IBITS]));
      automatic int unsigned cnt = 0;
      for (int k = 0; k < NT; k++) if (v >= thr[c][k]) cnt++;
      q[c*OBITS +: OBITS] = OBITS'(cnt) - OBITS'(1 << (OBITS - 1));
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= q;
    end
  end

endmodule
