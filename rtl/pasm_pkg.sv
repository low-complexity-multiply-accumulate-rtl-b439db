// pasm_pkg: shared constants and types of the weight-shared-with-PASM
// convolution accelerator.
//
// The default sizes are those of the accelerator's main configuration: a
// 5x5 image tile with 15 channels, 2 output kernels of 3x3 taps, 4 shared
// weight bins, 32-bit integer image and weight data. The stride of 1 is this
// design's choice (the text only explains what strides of 1 and 2 do).
// The types are the host load-port target select and the gray-coded state
// of the controller.
package pasm_pkg;

  // Main configuration (image tile C x IH x IW, M kernels of KY x KX, B bins)
  localparam int unsigned DEF_C      = 15;
  localparam int unsigned DEF_IH     = 5;
  localparam int unsigned DEF_IW     = 5;
  localparam int unsigned DEF_KY     = 3;
  localparam int unsigned DEF_KX     = 3;
  localparam int unsigned DEF_M      = 2;
  localparam int unsigned DEF_B      = 4;
  localparam int unsigned DEF_STRIDE = 1;
  localparam int unsigned DEF_W      = 32;  // image width
  localparam int unsigned DEF_WW     = 32;  // shared weight width

  // Which register file a host write on the load port goes to.
  typedef enum logic [1:0] {
    LD_IMAGE  = 2'd0,
    LD_BINIDX = 2'd1,
    LD_WEIGHT = 2'd2,
    LD_BIAS   = 2'd3
  } load_target_e;

  // Controller state, gray coded: every legal transition flips one bit.
  //   IDLE -> ACC -> MAC -> ACC ... -> MAC -> DRAIN -> IDLE
  typedef enum logic [1:0] {
    ST_IDLE  = 2'b00,
    ST_ACC   = 2'b01,  // pre-accumulate (PAS) phase, one tap per cycle
    ST_MAC   = 2'b11,  // post-pass multiply phase, one bin per cycle
    ST_DRAIN = 2'b10   // last outFeat write of the layer
  } ctrl_state_e;

  // Output rows/columns produced by the loop nest
  //   for (i = K/2; i < I - K/2; i += S)
  function automatic int unsigned out_dim(int unsigned i, int unsigned k, int unsigned s);
    return (i - 2 * (k / 2) + s - 1) / s;
  endfunction

endpackage
