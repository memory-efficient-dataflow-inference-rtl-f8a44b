// axis_combiner: joins two AXI streams of equal width into one stream of
// twice the width. A beat is produced when both inputs hold a word; the
// output word is {b, a} (input a in the low half). Both inputs are consumed
// together. Purely combinational, no latency.
//
// In the fractional-ratio packing the two halves of a split weight buffer
// (the EVEN words on one RAM port, the ODD words on the other) are rejoined
// here before a 2:1 width converter restores the original word order. The
// block and its position come from the paper's fractional packing example;
// the {b, a} bit order is this design's choice.
module axis_combiner #(
  parameter int unsigned WIDTH = 16
) (
  input  logic               a_valid,
  output logic               a_ready,
  input  logic [WIDTH-1:0]   a_data,
  input  logic               b_valid,
  output logic               b_ready,
  input  logic [WIDTH-1:0]   b_data,
  output logic               m_valid,
  input  logic               m_ready,
  output logic [2*WIDTH-1:0] m_data
);

  assign m_valid = a_valid && b_valid;
  assign m_data  = {b_data, a_data};
  assign a_ready = m_valid && m_ready;
  assign b_ready = m_valid && m_ready;

endmodule
