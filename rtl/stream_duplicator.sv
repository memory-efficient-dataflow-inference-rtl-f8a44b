// stream_duplicator: copies one AXI stream onto two, feeding the two branches
// of a ResBlock.
//
// Each output has its own register, so the branches may take a beat in
// different cycles. A new input beat is accepted only when both registers
// are free or being emptied in that cycle; every beat therefore reaches both
// outputs exactly once and in order.
// Timing: one register stage; one beat per cycle when both outputs are ready.
module stream_duplicator #(
  parameter int unsigned WIDTH = 1024
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out0_valid,
  input  logic             out0_ready,
  output logic [WIDTH-1:0] out0_data,
  output logic             out1_valid,
  input  logic             out1_ready,
  output logic [WIDTH-1:0] out1_data
);

  logic free0, free1, take;
  assign free0    = !out0_valid || out0_ready;
  assign free1    = !out1_valid || out1_ready;
  assign in_ready = free0 && free1;
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      out0_valid <= 1'b0;
      out1_valid <= 1'b0;
    end else begin
      if (out0_valid && out0_ready) out0_valid <= 1'b0;
      if (out1_valid && out1_ready) out1_valid <= 1'b0;
      if (take) begin
        out0_valid <= 1'b1;
        out1_valid <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (take) begin
      out0_data <= in_data;
      out1_data <= in_data;
    end
  end

endmodule
