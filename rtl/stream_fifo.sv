// stream_fifo: synchronous AXI-Stream FIFO with an almost-full flag.
//
// Used in two places. In a weight streamer each logical buffer has one of
// these at its output; its almost-full flag (AFULL) tells the address
// generator not to schedule another read of that buffer, so that a read in
// flight always finds room. On the ResBlock bypass path a deep instance holds
// activations until the convolution branch has produced its result.
// The storage is a plain array (inferable as distributed or block RAM).
// Interface: s_valid/s_ready/s_data in, m_valid/m_ready/m_data out, count
// (entries held) and afull (count >= AFULL_LEVEL).
// Timing: a word written in one cycle is visible at the output in the next.
module stream_fifo #(
  parameter int unsigned WIDTH       = 18,
  parameter int unsigned DEPTH       = 4,
  parameter int unsigned AFULL_LEVEL = DEPTH - 1,
  localparam int unsigned CW         = $clog2(DEPTH + 1),
  localparam int unsigned PW         = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [WIDTH-1:0] s_data,
  output logic             m_valid,
  input  logic             m_ready,
  output logic [WIDTH-1:0] m_data,
  output logic [CW-1:0]    count,
  output logic             afull
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wptr, rptr;
  logic             push, pop;

  assign s_ready = (count != CW'(DEPTH));
  assign m_valid = (count != '0);
  assign m_data  = mem[rptr];
  assign afull   = (count >= CW'(AFULL_LEVEL));
  assign push    = s_valid && s_ready;
  assign pop     = m_valid && m_ready;

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= s_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= next_ptr(wptr);
      if (pop)  rptr <= next_ptr(rptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

`ifndef SYNTHESIS
  // AXI-Stream rule: once valid is high the data must be held until taken.
  logic             hold_v;
  logic [WIDTH-1:0] hold_d;
  always_ff @(posedge clk) begin
    if (rst) hold_v <= 1'b0;
    else begin
      hold_v <= s_valid && !s_ready;
      hold_d <= s_data;
      if (hold_v) assert (s_valid && s_data == hold_d)
        else $error("stream_fifo: input dropped or changed valid data before ready");
    end
  end
`endif

endmodule
