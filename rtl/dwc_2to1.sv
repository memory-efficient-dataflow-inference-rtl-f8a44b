// dwc_2to1: data width converter that splits each 2*WIDTH input word into two
// WIDTH output words, the low half first, then the high half.
//
// One input word is held in a register; a new input word is accepted when the
// register is empty or in the same cycle its high half leaves, so a steady
// input of one word per two cycles gives one output word per cycle without
// bubbles. Latency: the low half is available the cycle after the input word
// is accepted. Synchronous active-high reset (not specified by the paper).
//
// The paper names a "DWC" (2:1) after the AXIS combiner in its fractional
// packing example; the register structure is this design's choice.
module dwc_2to1 #(
  parameter int unsigned WIDTH = 16
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               s_valid,
  output logic               s_ready,
  input  logic [2*WIDTH-1:0] s_data,
  output logic               m_valid,
  input  logic               m_ready,
  output logic [WIDTH-1:0]   m_data
);

  logic [2*WIDTH-1:0] word;
  logic               full, hi;

  assign m_valid = full;
  assign m_data  = hi ? word[WIDTH +: WIDTH] : word[0 +: WIDTH];
  assign s_ready = !full || (hi && m_ready);

  always_ff @(posedge clk) begin
    if (rst) begin
      full <= 1'b0;
      hi   <= 1'b0;
    end else begin
      if (m_valid && m_ready) begin
        if (!hi) hi <= 1'b1;
        else begin
          hi   <= 1'b0;
          full <= 1'b0;
        end
      end
      if (s_valid && s_ready) begin
        full <= 1'b1;
        hi   <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (s_valid && s_ready) word <= s_data;
  end

endmodule
