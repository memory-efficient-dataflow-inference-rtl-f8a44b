// fcmp_pkg: constants and types shared by the frequency-compensated
// memory packing (FCMP) weight streamers and the compute blocks.
//
// The physical RAM shape (18 bits x 1024 words, two ports) is the Xilinx
// RAMB18 the design targets. Weight encodings follow the quantized ResNet-50
// the design is built for (binary weights are stored as one bit, 1 -> +1,
// 0 -> -1, see mvau_stream). Activations are signed integers: 2 bits inside a ResBlock branch and 4 bits
// into and out of the elementwise addition.
package fcmp_pkg;

  // Block RAM shape: 18 Kb, 18 bits wide, 1024 deep, 2 ports.
  localparam int unsigned BRAM_WIDTH = 18;
  localparam int unsigned BRAM_DEPTH = 1024;

  // Activation precisions of the quantized ResNet-50.
  localparam int unsigned ACT_BITS_BRANCH = 2;  // inside a ResBlock branch
  localparam int unsigned ACT_BITS_ADD    = 4;  // into and out of the addition

  // Which of the two BRAM ports serves a buffer.
  typedef enum logic {
    PORT_A = 1'b0,
    PORT_B = 1'b1
  } bram_port_e;

endpackage
