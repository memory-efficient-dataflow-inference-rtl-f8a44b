// packed_streamer: reads NBUF logical weight buffers that share one two-port
// block RAM and turns each into its own AXI stream (frequency compensated
// memory packing, FCMP).
//
// The buffers are packed one after the other in the RAM's address space
// (BUF_BASE, BUF_LEN). Each buffer is assigned to one RAM port (BUF_PORT).
// Every memory clock, each port's address generator picks one of its buffers
// in round-robin order and reads that buffer's next word; the word lands, one
// cycle later, in the buffer's output FIFO. A buffer whose FIFO raises AFULL
// is passed over and its slot goes to the next buffer of the same port that
// can take a word (adaptive read slot allocation); slot_redistributed pulses
// when that happens. Each buffer is read cyclically from its first to its last
// word and then again from the first, since the compute block consumes the
// same weights for every input vector.
//
// With N buffers split evenly over the two ports, every buffer gets 2/N reads
// per memory cycle; with the memory clock R_F = N/2 times the compute clock
// that is one read per compute cycle, which is what a PE needs. The default
// configuration is the 4-buffer, R_F = 2 arrangement: buffers 0 and 1 on
// port B, buffers 2 and 3 on port A, each 256 words of the 1024-word RAM.
//
// Weights are loaded through cfg_we/cfg_addr/cfg_data, which write via port A
// (raw RAM addresses). Reads start when run is high; while run is low or a
// configuration write is in progress no read is issued on the affected port.
//
// Timing: a read issued in memory cycle t is in the FIFO at t+2 and can be
// taken from out_* then.
module packed_streamer
  import fcmp_pkg::*;
#(
  parameter int unsigned WIDTH      = BRAM_WIDTH,
  parameter int unsigned RAM_DEPTH  = BRAM_DEPTH,
  parameter int unsigned NBUF       = 4,
  parameter int unsigned BUF_BASE [NBUF] = '{0, 256, 512, 768},
  parameter int unsigned BUF_LEN  [NBUF] = '{256, 256, 256, 256},
  parameter bit          BUF_PORT [NBUF] = '{1'b1, 1'b1, 1'b0, 1'b0},  // 1: port B, 0: port A
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned AW        = $clog2(RAM_DEPTH),
  localparam int unsigned BW        = (NBUF > 1) ? $clog2(NBUF) : 1
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        run,
  // weight loading (port A)
  input  logic                        cfg_we,
  input  logic [AW-1:0]               cfg_addr,
  input  logic [WIDTH-1:0]            cfg_data,
  // one stream per logical buffer
  output logic [NBUF-1:0]             out_valid,
  input  logic [NBUF-1:0]             out_ready,
  output logic [NBUF-1:0][WIDTH-1:0]  out_data,
  // status
  output logic [NBUF-1:0]             afull,
  output logic [1:0]                  slot_redistributed  // [0]: port A, [1]: port B
);

  // ---------------------------------------------------------------------------
  // Address generator: one scheduler per port
  // ---------------------------------------------------------------------------
  logic [1:0]          issue;              // port issues a read this cycle
  logic [1:0][BW-1:0]  issue_buf;          // which buffer
  logic [1:0][AW-1:0]  issue_addr;
  logic [1:0]          skipped;            // an AFULL buffer gave up its slot
  logic [1:0][BW-1:0]  last_buf;           // round-robin state
  logic [NBUF-1:0][AW-1:0] rd_ptr;         // word offset inside each buffer
  logic [1:0]          port_free;

  assign port_free[PORT_A] = run && !cfg_we;
  assign port_free[PORT_B] = run;

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      automatic bit found = 1'b0;
      automatic bit first = 1'b1;
      issue[p]      = 1'b0;
      issue_buf[p]  = '0;
      skipped[p]    = 1'b0;
      for (int k = 1; k <= NBUF; k++) begin
        automatic logic [BW-1:0] idx = BW'((int'(last_buf[p]) + k) % NBUF);
        if (BUF_PORT[idx] == bit'(p) && !found) begin
          if (!afull[idx]) begin
            found        = 1'b1;
            issue_buf[p] = idx;
            skipped[p]   = !first;
          end
          first = 1'b0;
        end
      end
      issue[p]      = found && port_free[p];
      skipped[p]    = skipped[p] && issue[p];
      issue_addr[p] = AW'(BUF_BASE[issue_buf[p]]) + rd_ptr[issue_buf[p]];
    end
  end

  assign slot_redistributed = skipped;

  logic [1:0]         rd_vld;  // read data of this port arrives this cycle
  logic [1:0][BW-1:0] rd_buf;

  always_ff @(posedge clk) begin
    if (rst) begin
      last_buf <= '0;
      rd_ptr   <= '0;
      rd_vld   <= '0;
      rd_buf   <= '0;
      // start each port's round robin just before its first buffer
      for (int p = 0; p < 2; p++) last_buf[p] <= BW'(NBUF - 1);
    end else begin
      rd_vld <= issue;
      for (int p = 0; p < 2; p++) begin
        if (issue[p]) begin
          last_buf[p] <= issue_buf[p];
          rd_buf[p]   <= issue_buf[p];
          rd_ptr[issue_buf[p]] <= (rd_ptr[issue_buf[p]] == AW'(BUF_LEN[issue_buf[p]] - 1))
                                  ? '0 : rd_ptr[issue_buf[p]] + 1'b1;
        end
      end
    end
  end

  // ---------------------------------------------------------------------------
  // The physical RAM
  // ---------------------------------------------------------------------------
  logic [WIDTH-1:0] rdata_a, rdata_b;

  tdp_bram #(.WIDTH(WIDTH), .DEPTH(RAM_DEPTH)) u_ram (
    .clk     (clk),
    .a_en    (cfg_we || issue[PORT_A]),
    .a_we    (cfg_we),
    .a_addr  (cfg_we ? cfg_addr : issue_addr[PORT_A]),
    .a_wdata (cfg_data),
    .a_rdata (rdata_a),
    .b_en    (issue[PORT_B]),
    .b_addr  (issue_addr[PORT_B]),
    .b_rdata (rdata_b)
  );

  // ---------------------------------------------------------------------------
  // Port demultiplexers into the per-buffer FIFOs
  // ---------------------------------------------------------------------------
  for (genvar i = 0; i < NBUF; i++) begin : g_buf
    localparam int unsigned P = BUF_PORT[i] ? 1 : 0;
    logic push, s_ready;
    logic [$clog2(FIFO_DEPTH + 1)-1:0] fifo_count;  // occupancy, for inspection
    assign push = rd_vld[P] && (rd_buf[P] == BW'(i));

    stream_fifo #(.WIDTH(WIDTH), .DEPTH(FIFO_DEPTH), .AFULL_LEVEL(FIFO_DEPTH - 1)) u_fifo (
      .clk     (clk),
      .rst     (rst),
      .s_valid (push),
      .s_ready (s_ready),
      .s_data  (BUF_PORT[i] ? rdata_b : rdata_a),
      .m_valid (out_valid[i]),
      .m_ready (out_ready[i]),
      .m_data  (out_data[i]),
      .count   (fifo_count),
      .afull   (afull[i])
    );

`ifndef SYNTHESIS
    always_ff @(posedge clk) begin
      if (!rst && push) assert (s_ready) else $error("packed_streamer: FIFO %0d overflow (count %0d)", i, fifo_count);
    end
`endif
  end

endmodule
