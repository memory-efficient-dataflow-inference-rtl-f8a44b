// gals_mvau: one convolution layer built as two globally asynchronous,
// locally synchronous islands.
//
// The memory island (clk_mem) holds the layer's weights in packed two-port
// RAMs and streams them out (stream_generator). An asynchronous AXI-Stream
// FIFO carries the weight beats to the compute island (clk_c), where a
// streaming MVAU consumes one beat per fold. Because each RAM serves
// BIN_HEIGHT PE buffers through its two ports, the memory clock must run at
// least BIN_HEIGHT/2 times the compute clock for the MVAU never to wait for
// weights (2x for the default bin height of 4).
// Interface: wcfg_* loads the weight RAMs (memory clock); thr_* loads the
// thresholds, in_*/out_* are the activation streams (compute clock). run
// starts the weight streamers.
// Timing: after the weight pipeline has filled, one fold per compute cycle;
// a vector takes (MH/PE)*(MW/SIMD) compute cycles.
module gals_mvau
  import fcmp_pkg::*;
#(
  parameter int unsigned MW          = 256,
  parameter int unsigned MH          = 64,
  parameter int unsigned PE          = 4,
  parameter int unsigned SIMD        = 16,
  parameter int unsigned WBITS       = 1,
  parameter int unsigned ABITS       = 2,
  parameter int unsigned OBITS       = 2,
  parameter int unsigned BIN_HEIGHT  = 4,
  parameter int unsigned AFIFO_DEPTH = 16,
  localparam int unsigned BUF_LEN    = (MH / PE) * (MW / SIMD),
  localparam int unsigned NRAM       = PE / BIN_HEIGHT,
  localparam int unsigned RW         = (NRAM > 1) ? $clog2(NRAM) : 1,
  localparam int unsigned AW         = $clog2(BRAM_DEPTH),
  localparam int unsigned WW         = SIMD * WBITS,
  localparam int unsigned NT         = (1 << OBITS) - 1,
  localparam int unsigned ACCW       = $clog2(MW) + ABITS + 1,
  localparam int unsigned RBW        = (MH > 1) ? $clog2(MH) : 1,
  localparam int unsigned TBW        = (NT > 1) ? $clog2(NT) : 1
) (
  // memory island
  input  logic                   clk_mem,
  input  logic                   rst_mem,
  input  logic                   run,
  input  logic                   wcfg_we,
  input  logic [RW-1:0]          wcfg_ram,
  input  logic [AW-1:0]          wcfg_addr,
  input  logic [WW-1:0]          wcfg_data,
  output logic [NRAM-1:0][1:0]   slot_redistributed,
  // compute island
  input  logic                   clk_c,
  input  logic                   rst_c,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [MW*ABITS-1:0]    in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [MH*OBITS-1:0]    out_data,
  input  logic                   thr_we,
  input  logic [RBW-1:0]         thr_row,
  input  logic [TBW-1:0]         thr_idx,
  input  logic signed [ACCW-1:0] thr_data
);

  logic             gw_valid, gw_ready, cw_valid, cw_ready;
  logic [PE*WW-1:0] gw_data, cw_data;

  stream_generator #(
    .PE(PE), .SIMD(SIMD), .WBITS(WBITS), .BUF_LEN(BUF_LEN), .BIN_HEIGHT(BIN_HEIGHT)
  ) u_gen (
    .clk                (clk_mem),
    .rst                (rst_mem),
    .run                (run),
    .cfg_we             (wcfg_we),
    .cfg_ram            (wcfg_ram),
    .cfg_addr           (wcfg_addr),
    .cfg_data           (wcfg_data),
    .w_valid            (gw_valid),
    .w_ready            (gw_ready),
    .w_data             (gw_data),
    .slot_redistributed (slot_redistributed)
  );

  async_fifo #(.WIDTH(PE * WW), .DEPTH(AFIFO_DEPTH)) u_cdc (
    .s_clk   (clk_mem),
    .s_rst   (rst_mem),
    .s_valid (gw_valid),
    .s_ready (gw_ready),
    .s_data  (gw_data),
    .m_clk   (clk_c),
    .m_rst   (rst_c),
    .m_valid (cw_valid),
    .m_ready (cw_ready),
    .m_data  (cw_data)
  );

  mvau_stream #(
    .MW(MW), .MH(MH), .PE(PE), .SIMD(SIMD), .WBITS(WBITS), .ABITS(ABITS), .OBITS(OBITS)
  ) u_mvau (
    .clk       (clk_c),
    .rst       (rst_c),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .in_data   (in_data),
    .w_valid   (cw_valid),
    .w_ready   (cw_ready),
    .w_data    (cw_data),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_data  (out_data),
    .thr_we    (thr_we),
    .thr_row   (thr_row),
    .thr_idx   (thr_idx),
    .thr_data  (thr_data)
  );

endmodule
