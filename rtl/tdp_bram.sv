// tdp_bram: two-port block RAM, the physical memory into which several
// logical weight buffers are packed.
//
// Each port reads one word per clock with one cycle of latency (registered
// output, read-first). Port A can also write: it is the port through which
// the weights are loaded before inference starts. Port B is read-only, since
// weights are constant during inference. Both ports run on the memory clock.
// The default shape, 18 bits by 1024 words, is that of a Xilinx RAMB18.
// Interface: a_en/a_we/a_addr/a_wdata -> a_rdata, b_en/b_addr -> b_rdata.
// Timing: rdata is valid in the cycle after en was high.
module tdp_bram #(
  parameter int unsigned WIDTH = fcmp_pkg::BRAM_WIDTH,
  parameter int unsigned DEPTH = fcmp_pkg::BRAM_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  // port A: read/write
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port B: read only
  input  logic             b_en,
  input  logic [AW-1:0]    b_addr,
  output logic [WIDTH-1:0] b_rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) b_rdata <= mem[b_addr];
  end

endmodule
