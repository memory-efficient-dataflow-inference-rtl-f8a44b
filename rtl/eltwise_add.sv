// eltwise_add: the join of a ResBlock. Adds the bypass stream and the
// convolution-branch stream channel by channel.
//
// Both inputs and the output are signed 4-bit activations by default (the
// quantized ResNet-50 keeps the same scale on both inputs of the addition,
// so the sum needs no rescaling). The sum is saturated to the OBITS range.
// A beat is consumed from both inputs together, when both are valid.
// Interface: a_*, b_* in, out_* out; channel c at [c*BITS +: BITS].
// Timing: one register stage; one vector per cycle when out_ready is high.
module eltwise_add #(
  parameter int unsigned C     = 256,
  parameter int unsigned IBITS = 4,
  parameter int unsigned OBITS = 4
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               a_valid,
  output logic               a_ready,
  input  logic [C*IBITS-1:0] a_data,
  input  logic               b_valid,
  output logic               b_ready,
  input  logic [C*IBITS-1:0] b_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [C*OBITS-1:0] out_data
);

  localparam int signed OMAX = (1 <<< (OBITS - 1)) - 1;
  localparam int signed OMIN = -(1 <<< (OBITS - 1));

  logic               adv, take;
  logic [C*OBITS-1:0] sum;

  assign adv     = !out_valid || out_ready;
  assign take    = adv && a_valid && b_valid;
  assign a_ready = take;
  assign b_ready = take;

  always_comb begin
    for (int c = 0; c < C; c++) begin
      automatic int signed s = int'($signed(a_data[c*IBITS +: IBITS]))
                             + int'($signed(b_data[c*IBITS +: IBITS]));
      if (s > OMAX)      s = OMAX;
      else if (s < OMIN) s = OMIN;
      sum[c*OBITS +: OBITS] = OBITS'(s);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else if (adv) begin
      out_valid <= take;
      if (take) out_data <= sum;
    end
  end

endmodule
