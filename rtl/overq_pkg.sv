// overq_pkg: types and default sizes shared by the OverQ accelerator.
//
// OverQ (overwrite quantization) lets an activation that does not fit the
// normal B-bit code borrow the slot of a nearby zero along the input-channel
// dimension. Every slot of an activation vector therefore carries a 2-bit
// OverQ state next to its B-bit code. The state tells the processing element
// which weight to multiply by and how to align the product:
//
//   OQ_NONE  own weight, product at normal weight (1)
//   OQ_RO    range overwrite: slot holds the upper B bits of the value in the
//            slot above; weight of the PE above, product shifted left by B
//   OQ_PR    precision overwrite: slot holds B extra fraction bits of the
//            value above; weight of the PE above, product shifted right by B
//   OQ_CASC  cascade: slot holds the value of the channel above, moved down
//            one slot; weight of the PE above, no shift
//
// The four states and their 2-bit width follow the paper (range overwrite,
// precision overwrite, no OverQ, and the shifter "inactive for cascading").
// The binary encoding of the states is this design's choice.
//
// Number formats (this design's choice where the paper gives no format):
// activation codes are unsigned (post-ReLU), weights are two's complement.
// Partial sums carry B fraction bits so that the right shift of a precision
// overwrite loses nothing: a product at normal weight enters the sum shifted
// left by B, a range-overwrite product by 2B, a precision-overwrite one by 0.
package overq_pkg;

  // Defaults. 8-bit weights and 4-bit activations are the configuration of the
  // paper's ImageNet evaluation; a cascade factor of 4 is the one it chose.
  // The array size, accumulator depth and widths of sums and scale factors
  // are not given by the paper and are this design's choice.
  localparam int unsigned DEF_ACT_W     = 4;
  localparam int unsigned DEF_W_W       = 8;
  localparam int unsigned DEF_ROWS      = 16;
  localparam int unsigned DEF_COLS      = 16;
  localparam int unsigned DEF_CASC_MAX  = 4;
  localparam int unsigned DEF_PSUM_W    = 32;
  localparam int unsigned DEF_ACC_W     = 32;
  localparam int unsigned DEF_ACC_DEPTH = 64;
  localparam int unsigned DEF_SCALE_W   = 16;
  localparam int unsigned DEF_SHIFT_W   = 6;

  typedef enum logic [1:0] {
    OQ_NONE = 2'b00,
    OQ_RO   = 2'b01,
    OQ_PR   = 2'b10,
    OQ_CASC = 2'b11
  } oq_state_e;

endpackage
