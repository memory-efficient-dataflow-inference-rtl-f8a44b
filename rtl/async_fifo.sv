// async_fifo: asynchronous AXI-Stream FIFO that carries the weight stream from
// the memory clock domain into the compute clock domain.
//
// Classic dual-clock design: a write pointer in the source domain and a read
// pointer in the sink domain, each kept in binary and Gray code; the Gray
// copies cross to the other domain through two flip-flop synchronisers. Full
// and empty are computed from the local pointer and the synchronised remote
// one, so both are pessimistic by the synchroniser delay and never wrong.
// DEPTH must be a power of two.
// Interface: s_* on s_clk, m_* on m_clk; each domain has its own synchronous
// reset, and both resets must be applied together before use.
// Timing: a word written at a source clock edge reaches m_valid after two to
// three sink clock edges.
module async_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             s_clk,
  input  logic             s_rst,
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [WIDTH-1:0] s_data,
  input  logic             m_clk,
  input  logic             m_rst,
  output logic             m_valid,
  input  logic             m_ready,
  output logic [WIDTH-1:0] m_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wgray_s1, wgray_s2;  // write pointer seen in the read domain
  logic [AW:0] rgray_s1, rgray_s2;  // read pointer seen in the write domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write domain ----------------
  logic push;
  logic [AW:0] wbin_next;
  assign s_ready   = (wgray != {~rgray_s2[AW:AW-1], rgray_s2[AW-2:0]});
  assign push      = s_valid && s_ready;
  assign wbin_next = wbin + (AW+1)'(push);

  always_ff @(posedge s_clk) begin
    if (push) mem[wbin[AW-1:0]] <= s_data;
  end

  always_ff @(posedge s_clk) begin
    if (s_rst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_s1 <= '0;
      rgray_s2 <= '0;
    end else begin
      wbin     <= wbin_next;
      wgray    <= bin2gray(wbin_next);
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
    end
  end

  // ---------------- read domain ----------------
  logic pop;
  logic [AW:0] rbin_next;
  assign m_valid   = (rgray != wgray_s2);
  assign m_data    = mem[rbin[AW-1:0]];
  assign pop       = m_valid && m_ready;
  assign rbin_next = rbin + (AW+1)'(pop);

  always_ff @(posedge m_clk) begin
    if (m_rst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_s1 <= '0;
      wgray_s2 <= '0;
    end else begin
      rbin     <= rbin_next;
      rgray    <= bin2gray(rbin_next);
      wgray_s1 <= wgray;
      wgray_s2 <= wgray_s1;
    end
  end

endmodule
