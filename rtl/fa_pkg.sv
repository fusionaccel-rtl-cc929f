// fa_pkg: constants and types shared by the accelerator.
//
// The build-time constants mirror the configuration macros of the original
// design: BURST_LEN is the channel parallelism (8 FP16 lanes = 128 bits),
// CMD_BURST_LEN the number of 32-bit words per layer command (3 = 12 bytes),
// MAX_O_SIDE the depth of the convolution full-sum cache, and
// MAX_KERNEL / MAX_KERNEL_SIZE the largest convolution window.
//
// layer_t is the layer register. The paper lists its fields and some widths
// (stride, padding and slot are 4 bits) but its figure with the bit layout is
// not available, so the packing of the three command words is this design's:
//   word 0: [3:0] op_type  [7:4] stride  [15:8] kernel  [23:16] kernel_size
//           [31:24] stride2
//   word 1: [7:0] input_side_size  [15:8] output_side_size
//           [19:16] padding_size   [23:20] slot  [31:24] reserved
//   word 2: [15:0] input_channel_size  [31:16] output_channel_size
// The words are sent in the order 0, 1, 2.
package fa_pkg;

  localparam int BURST_LEN       = 8;
  localparam int CMD_BURST_LEN   = 3;
  localparam int MAX_O_SIDE      = 128;
  localparam int MAX_KERNEL      = 3;
  localparam int MAX_KERNEL_SIZE = MAX_KERNEL * MAX_KERNEL;

  typedef enum logic [3:0] {
    OP_IDLE    = 4'd0,
    OP_CONV    = 4'd1,  // convolution followed by ReLU
    OP_MAXPOOL = 4'd2,
    OP_AVEPOOL = 4'd3
  } op_t;

  typedef struct packed {
    logic [15:0] output_channel_size;
    logic [15:0] input_channel_size;
    logic [7:0]  reserved;
    logic [3:0]  slot;
    logic [3:0]  padding_size;
    logic [7:0]  output_side_size;
    logic [7:0]  input_side_size;
    logic [7:0]  stride2;
    logic [7:0]  kernel_size;
    logic [7:0]  kernel;
    logic [3:0]  stride;
    op_t         op_type;
  } layer_t;

endpackage
