// fcmp_resblock: a ResNet-50 bottleneck residual block whose convolutions
// are decoupled, GALS MVAUs with frequency compensated packed weight
// memories.
//
// Type B (TYPE_A = 0, default, identity bypass; data path on the compute
// clock): the 4-bit input activation vector of a pixel is duplicated. One
// copy waits in the bypass FIFO; the other is requantized to 2 bits by the
// stand-alone thresholding unit and passes through the branch convolutions,
// C -> M (1x1, 2-bit output) and M -> C_OUT (1x1, 4-bit output, C_OUT = C).
// The elementwise adder sums the branch result and the bypass copy and
// saturates to 4 bits.
// Type A (TYPE_A = 1, for blocks that change the channel count): the input
// is requantized to 2 bits first, then duplicated; the bypass copy passes
// the bypass FIFO and a 1x1 convolution C -> C_OUT (4-bit output) before the
// adder. The order of units in both types follows the paper's block diagram;
// the channel counts are parameters.
//
// Each convolution's weights sit in a memory island on clk_mem: PE = 4
// weight buffers packed into one two-port RAM, read back at two words per
// memory cycle, which supplies all four PEs every compute cycle when clk_mem
// runs at twice clk_c.
//
// The 3x3 convolution of the bottleneck is not included: it needs a sliding
// window (im2col) generator in front of its MVAU, which is outside what this
// design provides. The branch is therefore 1x1 -> 1x1 on a pixel stream.
//
// Interface:
//   in_*/out_*     4-bit activation vectors, channel c at [c*4 +: 4], one
//                  pixel per beat (compute clock); C channels in, C_OUT out.
//   wcfg_*         weight RAM writes (memory clock); wcfg_layer 0 = first
//                  convolution, 1 = second, 2 = bypass convolution (type A);
//                  wcfg_addr is the raw RAM address.
//   thr_*          threshold writes (compute clock); thr_unit 0 = input
//                  thresholding, 1 = first convolution, 2 = second,
//                  3 = bypass convolution (type A).
//   run            starts the weight streamers (memory clock).
//   slot_redistributed  per convolution and RAM port: a read slot was given
//                  to another buffer because a weight FIFO was almost full.
// Timing: a pixel takes (M/PE)*(C/SIMD) = 256 compute cycles of folds in
// each convolution at the defaults, plus one cycle to hand over the result;
// the convolutions work on successive pixels at the same time, so the block
// accepts one pixel every 257 compute cycles in steady state (in general,
// the slowest convolution sets the rate).
// The bypass FIFO's count and afull outputs are left open on purpose: the
// FIFO is used as a plain elastic buffer here.
module fcmp_resblock
  import fcmp_pkg::*;
#(
  parameter int unsigned C            = 256,
  parameter int unsigned M            = 64,
  parameter int unsigned PE           = 4,
  parameter int unsigned SIMD         = 16,
  parameter int unsigned WBITS        = 1,
  parameter int unsigned BYPASS_DEPTH = 8,
  parameter bit          TYPE_A       = 1'b0,
  parameter int unsigned C_OUT        = C,
  localparam int unsigned NCONV       = TYPE_A ? 3 : 2,
  localparam int unsigned ABITS_IO    = ACT_BITS_ADD,
  localparam int unsigned ABITS_BR    = ACT_BITS_BRANCH,
  localparam int unsigned AW          = $clog2(BRAM_DEPTH),
  localparam int unsigned WW          = SIMD * WBITS,
  localparam int unsigned ACC1        = $clog2(C) + ABITS_BR + 1,
  localparam int unsigned ACC3        = $clog2(M) + ABITS_BR + 1,
  localparam int unsigned THW         = (ACC1 > ACC3) ? ACC1 : ACC3,
  localparam int unsigned CM          = (C > M) ? C : M,
  localparam int unsigned RBW         = $clog2((CM > C_OUT) ? CM : C_OUT)
) (
  input  logic                  clk_c,
  input  logic                  rst_c,
  input  logic                  clk_mem,
  input  logic                  rst_mem,
  input  logic                  run,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [C*ABITS_IO-1:0] in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [C_OUT*ABITS_IO-1:0] out_data,
  input  logic                  wcfg_we,
  input  logic [1:0]            wcfg_layer,
  input  logic [AW-1:0]         wcfg_addr,
  input  logic [WW-1:0]         wcfg_data,
  input  logic                  thr_we,
  input  logic [1:0]            thr_unit,
  input  logic [RBW-1:0]        thr_row,
  input  logic [3:0]            thr_idx,
  input  logic signed [THW-1:0] thr_data,
  output logic [NCONV-1:0][1:0] slot_redistributed
);

  localparam int unsigned NRAM = PE / 4;
  localparam int unsigned RW   = (NRAM > 1) ? $clog2(NRAM) : 1;

  // bypass stream into the adder (a_*) and branch stream into conv1 (t_*)
  logic                      a_valid, a_ready;
  logic [C_OUT*ABITS_IO-1:0] a_data;
  logic                      t_valid, t_ready;
  logic [C*ABITS_BR-1:0]     t_data;

  if (!TYPE_A) begin : g_type_b
    // duplicator (4-bit) -> bypass FIFO / thresholding -> branch
    logic                  byp_in_valid, byp_in_ready;
    logic [C*ABITS_IO-1:0] byp_in_data;
    logic                  br_valid, br_ready;
    logic [C*ABITS_IO-1:0] br_data;

    stream_duplicator #(.WIDTH(C * ABITS_IO)) u_dup (
      .clk        (clk_c),
      .rst        (rst_c),
      .in_valid   (in_valid),
      .in_ready   (in_ready),
      .in_data    (in_data),
      .out0_valid (byp_in_valid),
      .out0_ready (byp_in_ready),
      .out0_data  (byp_in_data),
      .out1_valid (br_valid),
      .out1_ready (br_ready),
      .out1_data  (br_data)
    );

    stream_fifo #(.WIDTH(C * ABITS_IO), .DEPTH(BYPASS_DEPTH)) u_bypass (
      .clk     (clk_c),
      .rst     (rst_c),
      .s_valid (byp_in_valid),
      .s_ready (byp_in_ready),
      .s_data  (byp_in_data),
      .m_valid (a_valid),
      .m_ready (a_ready),
      .m_data  (a_data),
      .count   (),
      .afull   ()
    );

    thresholding #(.C(C), .IBITS(ABITS_IO), .OBITS(ABITS_BR)) u_thr (
      .clk       (clk_c),
      .rst       (rst_c),
      .in_valid  (br_valid),
      .in_ready  (br_ready),
      .in_data   (br_data),
      .out_valid (t_valid),
      .out_ready (t_ready),
      .out_data  (t_data),
      .thr_we    (thr_we && thr_unit == 2'd0),
      .thr_ch    ($clog2(C)'(thr_row)),
      .thr_idx   (thr_idx[1:0]),
      .thr_data  ((ABITS_IO + 1)'(thr_data))
    );
  end else begin : g_type_a
    // thresholding -> duplicator (2-bit) -> bypass FIFO -> 1x1 conv / branch
    logic                  q_valid, q_ready;
    logic [C*ABITS_BR-1:0] q_data;
    logic                  byp_in_valid, byp_in_ready, byp_valid, byp_ready;
    logic [C*ABITS_BR-1:0] byp_in_data, byp_data;

    thresholding #(.C(C), .IBITS(ABITS_IO), .OBITS(ABITS_BR)) u_thr (
      .clk       (clk_c),
      .rst       (rst_c),
      .in_valid  (in_valid),
      .in_ready  (in_ready),
      .in_data   (in_data),
      .out_valid (q_valid),
      .out_ready (q_ready),
      .out_data  (q_data),
      .thr_we    (thr_we && thr_unit == 2'd0),
      .thr_ch    ($clog2(C)'(thr_row)),
      .thr_idx   (thr_idx[1:0]),
      .thr_data  ((ABITS_IO + 1)'(thr_data))
    );

    stream_duplicator #(.WIDTH(C * ABITS_BR)) u_dup (
      .clk        (clk_c),
      .rst        (rst_c),
      .in_valid   (q_valid),
      .in_ready   (q_ready),
      .in_data    (q_data),
      .out0_valid (byp_in_valid),
      .out0_ready (byp_in_ready),
      .out0_data  (byp_in_data),
      .out1_valid (t_valid),
      .out1_ready (t_ready),
      .out1_data  (t_data)
    );

    stream_fifo #(.WIDTH(C * ABITS_BR), .DEPTH(BYPASS_DEPTH)) u_bypass (
      .clk     (clk_c),
      .rst     (rst_c),
      .s_valid (byp_in_valid),
      .s_ready (byp_in_ready),
      .s_data  (byp_in_data),
      .m_valid (byp_valid),
      .m_ready (byp_ready),
      .m_data  (byp_data),
      .count   (),
      .afull   ()
    );

    gals_mvau #(
      .MW(C), .MH(C_OUT), .PE(PE), .SIMD(SIMD), .WBITS(WBITS), .ABITS(ABITS_BR), .OBITS(ABITS_IO)
    ) u_convb (
      .clk_mem            (clk_mem),
      .rst_mem            (rst_mem),
      .run                (run),
      .wcfg_we            (wcfg_we && wcfg_layer == 2'd2),
      .wcfg_ram           (RW'(0)),
      .wcfg_addr          (wcfg_addr),
      .wcfg_data          (wcfg_data),
      .slot_redistributed (slot_redistributed[2]),
      .clk_c              (clk_c),
      .rst_c              (rst_c),
      .in_valid           (byp_valid),
      .in_ready           (byp_ready),
      .in_data            (byp_data),
      .out_valid          (a_valid),
      .out_ready          (a_ready),
      .out_data           (a_data),
      .thr_we             (thr_we && thr_unit == 2'd3),
      .thr_row            ($clog2(C_OUT)'(thr_row)),
      .thr_idx            (thr_idx),
      .thr_data           (ACC1'(thr_data))
    );
  end

  logic                  h_valid, h_ready;
  logic [M*ABITS_BR-1:0] h_data;

  gals_mvau #(
    .MW(C), .MH(M), .PE(PE), .SIMD(SIMD), .WBITS(WBITS), .ABITS(ABITS_BR), .OBITS(ABITS_BR)
  ) u_conv1 (
    .clk_mem            (clk_mem),
    .rst_mem            (rst_mem),
    .run                (run),
    .wcfg_we            (wcfg_we && wcfg_layer == 2'd0),
    .wcfg_ram           (RW'(0)),
    .wcfg_addr          (wcfg_addr),
    .wcfg_data          (wcfg_data),
    .slot_redistributed (slot_redistributed[0]),
    .clk_c              (clk_c),
    .rst_c              (rst_c),
    .in_valid           (t_valid),
    .in_ready           (t_ready),
    .in_data            (t_data),
    .out_valid          (h_valid),
    .out_ready          (h_ready),
    .out_data           (h_data),
    .thr_we             (thr_we && thr_unit == 2'd1),
    .thr_row            ($clog2(M)'(thr_row)),
    .thr_idx            (thr_idx[1:0]),
    .thr_data           (ACC1'(thr_data))
  );

  logic                  y_valid, y_ready;
  logic [C_OUT*ABITS_IO-1:0] y_data;

  gals_mvau #(
    .MW(M), .MH(C_OUT), .PE(PE), .SIMD(SIMD), .WBITS(WBITS), .ABITS(ABITS_BR), .OBITS(ABITS_IO)
  ) u_conv3 (
    .clk_mem            (clk_mem),
    .rst_mem            (rst_mem),
    .run                (run),
    .wcfg_we            (wcfg_we && wcfg_layer == 2'd1),
    .wcfg_ram           (RW'(0)),
    .wcfg_addr          (wcfg_addr),
    .wcfg_data          (wcfg_data),
    .slot_redistributed (slot_redistributed[1]),
    .clk_c              (clk_c),
    .rst_c              (rst_c),
    .in_valid           (h_valid),
    .in_ready           (h_ready),
    .in_data            (h_data),
    .out_valid          (y_valid),
    .out_ready          (y_ready),
    .out_data           (y_data),
    .thr_we             (thr_we && thr_unit == 2'd2),
    .thr_row            ($clog2(C_OUT)'(thr_row)),
    .thr_idx            (thr_idx),
    .thr_data           (ACC3'(thr_data))
  );

  eltwise_add #(.C(C_OUT), .IBITS(ABITS_IO), .OBITS(ABITS_IO)) u_add (
    .clk       (clk_c),
    .rst       (rst_c),
    .a_valid   (a_valid),
    .a_ready   (a_ready),
    .a_data    (a_data),
    .b_valid   (y_valid),
    .b_ready   (y_ready),
    .b_data    (y_data),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_data  (out_data)
  );

endmodule
