// qnn_pkg: constants shared by the integer-only quantized residual block.
//
// The block works entirely on integers. Activations are B_a-bit unsigned codes
// produced by a threshold quantizer, weights are B_w-bit signed integers, and
// MAC results and the residual path are ACC_W-bit signed integers. The default
// precision (4,4) is one of the two the paper evaluates (4,4 and 3,3). The
// accumulator width and the 3x3 tap ordering are this design's own choices.
package qnn_pkg;
  // Default activation and weight precision (paper: (w,a) = 4,4 and 3,3).
  parameter int unsigned BA_DEF  = 4;
  parameter int unsigned BW_DEF  = 4;
  // Width of MAC results and of the residual path. The worst-case MAC of a
  // ResNet-18 layer with 512 input channels at (4,4) is 15*7*4608 = 483840,
  // which needs 20 signed bits; 24 leaves headroom for the residual sums.
  parameter int unsigned ACC_W_DEF = 24;
  // Taps of a 3x3 kernel, numbered k = 3*dy + dx, dy/dx = 0..2 meaning
  // row/column offsets -1..+1 around the output pixel.
  parameter int unsigned TAPS = 9;

  // Sequencer states of the residual basic block.
  typedef enum logic [2:0] {
    ST_IDLE,    // waiting for start
    ST_QIN,     // quantize the block input into the first activation buffer
    ST_CONV1,   // first 3x3 convolution, quantized into the second buffer
    ST_CONV2,   // second 3x3 convolution plus residual, streamed out
    ST_DRAIN,   // let the pipeline empty before the next phase
    ST_DONE     // one-cycle done pulse
  } seq_state_t;
endpackage
