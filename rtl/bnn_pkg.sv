// bnn_pkg: types and constants shared by the binary convolution accelerator.
//
// Data words on the off-chip bus are 32 bits wide. A kernel word packs 32
// one-bit weights of one D-bar (32 consecutive input channels at one kernel
// position); bit i is channel 32*j+i, 1 means +1 and 0 means -1. An input
// D-bar of 32 two-bit activations (unsigned 0..3) occupies ABITS bus words,
// one bit-plane each: word p holds bit p of the 32 activations.
//
// The 32-element word and the 1-bit weight / 2-bit activation precision follow
// the paper. The bit-plane packing of the activations and the weight encoding
// are this design's choice.
package bnn_pkg;

  localparam int unsigned WORD_W = 32;   // bus word and D-bar width (elements)
  localparam int unsigned ABITS  = 2;    // bits per activation
  localparam int unsigned ACC_W  = 32;   // PE accumulator width
  localparam int unsigned ADDR_W = 32;   // word address on the off-chip bus
  localparam int unsigned LEN_W  = 16;   // burst length field

  typedef logic [WORD_W-1:0]        word_t;
  typedef logic [ADDR_W-1:0]        addr_t;
  typedef logic [LEN_W-1:0]         len_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  // One input D-bar: ABITS bit-planes of 32 activations.
  typedef logic [ABITS-1:0][WORD_W-1:0] dbar_t;

  // Layer description written by the host before a start pulse.
  // All sizes are in elements except id_words (input depth / 32).
  typedef struct packed {
    logic [15:0] ih;        // input height (already padded)
    logic [15:0] iw;        // input width (already padded)
    logic [7:0]  id_words;  // input depth in 32-channel D-bars
    logic [3:0]  kh;        // kernel height
    logic [3:0]  kw;        // kernel width
    logic [15:0] ofm;       // number of output feature maps (kernels)
    addr_t       in_base;   // word address of input  (H x W x D order)
    addr_t       k_base;    // word address of kernels (K x Kh x Kw x D order)
    addr_t       out_base;  // word address of outputs (H x W x OFM order)
  } layer_cfg_t;

endpackage
