// stream_generator: the weight-storage half of a decoupled MVAU. It holds the
// weights of all PE lanes of one layer and emits, once per compute step, a
// beat holding the SIMD-wide weight word of every PE.
//
// The PE buffers are packed BIN_HEIGHT at a time into two-port RAMs
// (PE / BIN_HEIGHT RAMs), each read by a packed_streamer. Buffer p of RAM r
// serves PE r*BIN_HEIGHT + p and holds that PE's weights in consumption
// order: for each neuron fold nf, for each synapse fold sf, the word
// W[nf*PE + pe][sf*SIMD +: SIMD]. The per-PE streams are then merged into one
// wide AXI stream: a beat is emitted when every PE stream has a word.
// With BIN_HEIGHT = 3 each RAM is read by a fractional_streamer instead
// (memory clock 1.5x compute; buffer 1 of each RAM is stored as ODD/EVEN
// halves, see that module for the address layout; BUF_LEN must be even).
// Default: 4 PEs, SIMD 16 binary weights, 256 words per PE, i.e. one fully
// packed 16 x 1024 RAM at bin height 4.
// Interface: cfg_* loads the RAMs (cfg_ram selects the RAM, cfg_addr is the
// raw RAM address); w_* is the merged weight stream, PE p in bits
// [p*SIMD*WBITS +: SIMD*WBITS]. Everything runs on the memory clock.
module stream_generator
  import fcmp_pkg::*;
#(
  parameter int unsigned PE         = 4,
  parameter int unsigned SIMD       = 16,
  parameter int unsigned WBITS      = 1,
  parameter int unsigned BUF_LEN    = 256,
  parameter int unsigned BIN_HEIGHT = 4,
  parameter int unsigned RAM_DEPTH  = BRAM_DEPTH,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned WW        = SIMD * WBITS,
  localparam int unsigned NRAM      = PE / BIN_HEIGHT,
  localparam int unsigned AW        = $clog2(RAM_DEPTH),
  localparam int unsigned RW        = (NRAM > 1) ? $clog2(NRAM) : 1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               run,
  input  logic               cfg_we,
  input  logic [RW-1:0]      cfg_ram,
  input  logic [AW-1:0]      cfg_addr,
  input  logic [WW-1:0]      cfg_data,
  output logic               w_valid,
  input  logic               w_ready,
  output logic [PE*WW-1:0]   w_data,
  output logic [NRAM-1:0][1:0] slot_redistributed
);

  typedef int unsigned uarr_t [BIN_HEIGHT];
  typedef bit          barr_t [BIN_HEIGHT];

  function automatic uarr_t buf_bases();
    uarr_t r;
    for (int i = 0; i < BIN_HEIGHT; i++) r[i] = i * BUF_LEN;
    return r;
  endfunction

  function automatic uarr_t buf_lens();
    uarr_t r;
    for (int i = 0; i < BIN_HEIGHT; i++) r[i] = BUF_LEN;
    return r;
  endfunction

  // first half of the buffers on port B, second half on port A
  function automatic barr_t buf_ports();
    barr_t r;
    for (int i = 0; i < BIN_HEIGHT; i++) r[i] = (i < BIN_HEIGHT / 2);
    return r;
  endfunction

  logic [PE-1:0]         s_valid, s_ready;
  logic [PE-1:0][WW-1:0] s_data;

  for (genvar r = 0; r < NRAM; r++) begin : g_ram
    if (BIN_HEIGHT == 3) begin : g_frac
      // R_F = 1.5: buffer 1 split into ODD/EVEN halves on different ports
      fractional_streamer #(
        .WIDTH      (WW),
        .RAM_DEPTH  (RAM_DEPTH),
        .LEN        (BUF_LEN),
        .FIFO_DEPTH (FIFO_DEPTH)
      ) u_streamer (
        .clk                (clk),
        .rst                (rst),
        .run                (run),
        .cfg_we             (cfg_we && (cfg_ram == RW'(r))),
        .cfg_addr           (cfg_addr),
        .cfg_data           (cfg_data),
        .out_valid          (s_valid[r*BIN_HEIGHT +: BIN_HEIGHT]),
        .out_ready          (s_ready[r*BIN_HEIGHT +: BIN_HEIGHT]),
        .out_data           (s_data[r*BIN_HEIGHT +: BIN_HEIGHT]),
        .slot_redistributed (slot_redistributed[r])
      );
    end else begin : g_int
      packed_streamer #(
        .WIDTH      (WW),
        .RAM_DEPTH  (RAM_DEPTH),
        .NBUF       (BIN_HEIGHT),
        .BUF_BASE   (buf_bases()),
        .BUF_LEN    (buf_lens()),
        .BUF_PORT   (buf_ports()),
        .FIFO_DEPTH (FIFO_DEPTH)
      ) u_streamer (
        .clk                (clk),
        .rst                (rst),
        .run                (run),
        .cfg_we             (cfg_we && (cfg_ram == RW'(r))),
        .cfg_addr           (cfg_addr),
        .cfg_data           (cfg_data),
        .out_valid          (s_valid[r*BIN_HEIGHT +: BIN_HEIGHT]),
        .out_ready          (s_ready[r*BIN_HEIGHT +: BIN_HEIGHT]),
        .out_data           (s_data[r*BIN_HEIGHT +: BIN_HEIGHT]),
        .afull              (),          // AFULL is consumed inside the streamer
        .slot_redistributed (slot_redistributed[r])
      );
    end
  end

  // merge: one beat when every PE lane has its word
  assign w_valid = &s_valid;
  assign w_data  = s_data;
  assign s_ready = {PE{w_valid && w_ready}};

endmodule
