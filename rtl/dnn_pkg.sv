// dnn_pkg: types and constants shared by both accelerators.
//
// Number formats follow the paper: activations and weights are Q7.8 (sign, seven
// integer bits, eight fraction bits, 16 bits in all); products and sums are kept in
// 32 bits, Q15.16. A pruned weight row is streamed as 64-bit data words of three
// (weight, zero-count) tuples; a zero count is a 5-bit unsigned number. The bit
// placement of the tuples inside the word (tuple i at bits 21*i+20 .. 21*i, weight in
// the upper 16 bits, bit 63 unused) is this design's choice; the paper only gives the
// field widths and the order weight-then-zeros.
package dnn_pkg;

  typedef logic signed [15:0] q7_8_t;    // activation or weight
  typedef logic signed [31:0] q15_16_t;  // product or accumulated sum

  localparam int unsigned DMA_W   = 64;  // width of one DMA / data word
  localparam int unsigned ZERO_W  = 5;   // zero-count field of a sparse tuple
  localparam int unsigned TUPLE_W = 16 + ZERO_W;

  // Activation functions selectable at run time.
  typedef enum logic [0:0] {
    ACT_RELU    = 1'b0,
    ACT_SIGMOID = 1'b1
  } act_sel_t;

  // One (weight, preceding zeros) tuple of the sparse row format.
  typedef struct packed {
    q7_8_t             w;
    logic [ZERO_W-1:0] z;
  } sparse_tuple_t;

  // Register map of the control unit (byte addresses on the AXI4-Lite port).
  localparam logic [5:0] REG_CTRL   = 6'h00;  // W: bit0 start, bit1 reset bank role
  localparam logic [5:0] REG_STATUS = 6'h04;  // R: bit0 busy, bit1 done, bit2 role
  localparam logic [5:0] REG_S_IN   = 6'h08;  // RW: inputs s_j of the layer
  localparam logic [5:0] REG_S_OUT  = 6'h0C;  // RW: neurons s_j+1 of the layer
  localparam logic [5:0] REG_ACT    = 6'h10;  // RW: bit0 activation (0 ReLU, 1 sigmoid)
  localparam logic [5:0] REG_BATCH  = 6'h14;  // RW: samples in the batch (batch design)
  localparam logic [5:0] REG_IRQEN  = 6'h18;  // RW: bit0 interrupt enable
  localparam logic [5:0] REG_CYCLES = 6'h1C;  // R: cycles of the last / current layer
  localparam logic [5:0] REG_INFO   = 6'h20;  // R: design constants

endpackage
