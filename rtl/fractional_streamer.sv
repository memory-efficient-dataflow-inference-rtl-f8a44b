// fractional_streamer: three logical weight buffers in one two-port RAM, read
// at a memory clock of only R_F = 1.5 times the compute clock (the paper's
// fractional frequency-compensated packing).
//
// Three buffers cannot be spread evenly over two ports, so buffer 1 is split
// into an ODD half (its odd-numbered words) and an EVEN half (its even
// words), which go to different ports. The RAM holds, in address order:
// buffer 0 (LEN words, port B), buffer 1 ODD (LEN/2, port B), buffer 1 EVEN
// (LEN/2, port A), buffer 2 (LEN, port A). Each port then has 1.5 words of
// demand per compute cycle = one read per memory cycle. A packed_streamer
// reads these four physical buffers; its adaptive slot allocation gives the
// slots that the half-rate ODD/EVEN buffers do not need to buffers 0 and 2,
// which need two reads for every one of the halves. An axis_combiner rejoins
// EVEN and ODD words into pairs and a dwc_2to1 emits them in the original
// order (word 2k, then 2k+1) as logical stream 1.
//
// Interface: cfg_* writes raw RAM addresses through port A (word k of
// buffer 1 lives at LEN + k/2 if k is odd, at LEN + LEN/2 + k/2 if k is
// even); out_* are the three logical streams; slot_redistributed as in
// packed_streamer. Timing: stream 0 and 2 words appear two memory cycles
// after their read; stream 1 one cycle later (width converter register).
//
// From the paper: the ODD/EVEN split, the placement of the halves on
// different ports, the combiner + 2:1 width converter and the buffer order.
// Own choices: which port serves which buffer beyond that, LEN even, FIFO
// depths.
module fractional_streamer
  import fcmp_pkg::*;
#(
  parameter int unsigned WIDTH      = BRAM_WIDTH,
  parameter int unsigned RAM_DEPTH  = BRAM_DEPTH,
  parameter int unsigned LEN        = 340,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned AW        = $clog2(RAM_DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   run,
  input  logic                   cfg_we,
  input  logic [AW-1:0]          cfg_addr,
  input  logic [WIDTH-1:0]       cfg_data,
  output logic [2:0]             out_valid,
  input  logic [2:0]             out_ready,
  output logic [2:0][WIDTH-1:0]  out_data,
  output logic [1:0]             slot_redistributed
);

  localparam int unsigned HALF = LEN / 2;

  logic [3:0]            p_valid, p_ready;
  logic [3:0][WIDTH-1:0] p_data;

  packed_streamer #(
    .WIDTH      (WIDTH),
    .RAM_DEPTH  (RAM_DEPTH),
    .NBUF       (4),
    .BUF_BASE   ('{0, LEN, LEN + HALF, 2 * LEN}),
    .BUF_LEN    ('{LEN, HALF, HALF, LEN}),
    .BUF_PORT   ('{1'b1, 1'b1, 1'b0, 1'b0}),
    .FIFO_DEPTH (FIFO_DEPTH)
  ) u_streamer (
    .clk                (clk),
    .rst                (rst),
    .run                (run),
    .cfg_we             (cfg_we),
    .cfg_addr           (cfg_addr),
    .cfg_data           (cfg_data),
    .out_valid          (p_valid),
    .out_ready          (p_ready),
    .out_data           (p_data),
    .afull              (),          // used inside the streamer only
    .slot_redistributed (slot_redistributed)
  );

  // buffers 0 and 2 pass straight through
  assign out_valid[0] = p_valid[0];
  assign out_data[0]  = p_data[0];
  assign p_ready[0]   = out_ready[0];
  assign out_valid[2] = p_valid[3];
  assign out_data[2]  = p_data[3];
  assign p_ready[3]   = out_ready[2];

  // buffer 1: EVEN (physical 2) + ODD (physical 1) -> pair -> two words
  logic               c_valid, c_ready;
  logic [2*WIDTH-1:0] c_data;

  axis_combiner #(.WIDTH(WIDTH)) u_comb (
    .a_valid (p_valid[2]),
    .a_ready (p_ready[2]),
    .a_data  (p_data[2]),
    .b_valid (p_valid[1]),
    .b_ready (p_ready[1]),
    .b_data  (p_data[1]),
    .m_valid (c_valid),
    .m_ready (c_ready),
    .m_data  (c_data)
  );

  dwc_2to1 #(.WIDTH(WIDTH)) u_dwc (
    .clk     (clk),
    .rst     (rst),
    .s_valid (c_valid),
    .s_ready (c_ready),
    .s_data  (c_data),
    .m_valid (out_valid[1]),
    .m_ready (out_ready[1]),
    .m_data  (out_data[1])
  );

endmodule
