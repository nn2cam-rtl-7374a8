// Shared types and constants of the streaming CNN accelerator.
//
// Every inter-layer stream carries one activation per beat in an ACT_W-bit
// element. Fixed-point activations are signed two's complement values in the
// low a_bits of the element; binary activations use bit 0 (1 = +1, 0 = -1).
// A network is described by a packed array of layer_cfg_t records, one per
// layer, in the order the data flows. The layer fields follow the loop nest of
// a generic convolution layer (square input of dim x dim x ich, kernel k x k,
// stride, zero padding, och output channels) plus the per-layer parallelism
// (#PE output channels, #SIMD input channels per cycle) and the per-layer
// precisions of activations, weights and outputs.
//
// The 16-bit stream element, the 256-bit parameter word and both default
// networks' layer shapes are this design's choices; 5 layers, 28x28 input,
// 11 outputs and binary or 16-bit precision follow the paper.
package nn_pkg;

  localparam int ACT_W   = 16;   // stream element width (widest activation)
  localparam int PARAM_W = 256;  // widest parameter word (#SIMD * weight bits)
  localparam int PARAM_CHUNKS = PARAM_W / 32;
  localparam int PIX_W   = 8;    // camera pixel width

  typedef enum logic [1:0] {
    L_CONV = 2'd0,   // convolution, or fully connected when k == dim
    L_POOL = 2'd1    // channel-wise average pooling
  } layer_kind_e;

  typedef struct packed {
    layer_kind_e kind;
    logic [15:0] dim;     // input feature map width = height
    logic [15:0] ich;     // input channels
    logic [15:0] och;     // output channels (== ich for pooling)
    logic [7:0]  k;       // kernel size
    logic [7:0]  stride;
    logic [7:0]  pad;     // zero padding on every side
    logic [7:0]  pe;      // processing elements (output-channel parallelism)
    logic [7:0]  simd;    // input channels per PE per cycle
    logic [7:0]  a_bits;  // input activation bits
    logic [7:0]  a_frac;  // input activation fractional bits
    logic        a_bin;   // input activations binary (+1/-1)
    logic [7:0]  w_bits;
    logic [7:0]  w_frac;
    logic        w_bin;
    logic [7:0]  o_bits;  // output activation bits
    logic [7:0]  o_frac;
    logic        o_bin;   // output is sign(acc + bias)
    logic        relu;
    logic [7:0]  b_bits;  // bias bits (fractional bits = a_frac + w_frac)
  } layer_cfg_t;

  // Output size of a layer.
  function automatic int out_dim(layer_cfg_t c);
    return (int'(c.dim) + 2 * int'(c.pad) - int'(c.k)) / int'(c.stride) + 1;
  endfunction

  localparam int OCR_LAYERS = 5;

  // 5-layer OCR network for a 28x28 monochrome image with 11 class outputs,
  // binary variant: binary weights from the first layer on, binary
  // activations between the hidden convolutions, 16-bit output layer.
  // Layer 0 is the first entry (index 0 = least significant element).
  localparam layer_cfg_t [OCR_LAYERS-1:0] OCR28_BIN = '{
    // 4: fully connected 6x6x32 -> 11, 16-bit weights and outputs
    '{L_CONV, 16'd6,  16'd32, 16'd11, 8'd6, 8'd1, 8'd0, 8'd11, 8'd4,
      8'd16, 8'd0, 1'b0, 8'd16, 8'd8, 1'b0, 8'd16, 8'd0, 1'b0, 1'b0, 8'd16},
    // 3: 2x2 average pooling 12x12x32 -> 6x6x32
    '{L_POOL, 16'd12, 16'd32, 16'd32, 8'd2, 8'd2, 8'd0, 8'd1,  8'd4,
      8'd16, 8'd0, 1'b0, 8'd1,  8'd0, 1'b0, 8'd16, 8'd0, 1'b0, 1'b0, 8'd16},
    // 2: 3x3 conv, pad 1, 12x12x16 -> 12x12x32, XNOR, 16-bit ReLU output
    '{L_CONV, 16'd12, 16'd16, 16'd32, 8'd3, 8'd1, 8'd1, 8'd16, 8'd4,
      8'd1,  8'd0, 1'b1, 8'd1,  8'd0, 1'b1, 8'd16, 8'd0, 1'b0, 1'b1, 8'd16},
    // 1: 3x3 conv, stride 2, 26x26x16 -> 12x12x16, fully binary (XNOR)
    '{L_CONV, 16'd26, 16'd16, 16'd16, 8'd3, 8'd2, 8'd0, 8'd8,  8'd4,
      8'd1,  8'd0, 1'b1, 8'd1,  8'd0, 1'b1, 8'd1,  8'd0, 1'b1, 1'b0, 8'd16},
    // 0: 3x3 conv 28x28x1 -> 26x26x16, 8-bit pixels, binary weights
    '{L_CONV, 16'd28, 16'd1,  16'd16, 8'd3, 8'd1, 8'd0, 8'd16, 8'd1,
      8'd16, 8'd0, 1'b0, 8'd1,  8'd0, 1'b1, 8'd1,  8'd0, 1'b1, 1'b0, 8'd16}
  };

  // Same topology with 16-bit weights and activations everywhere.
  localparam layer_cfg_t [OCR_LAYERS-1:0] OCR28_16B = '{
    '{L_CONV, 16'd6,  16'd32, 16'd11, 8'd6, 8'd1, 8'd0, 8'd11, 8'd4,
      8'd16, 8'd0, 1'b0, 8'd16, 8'd8, 1'b0, 8'd16, 8'd0, 1'b0, 1'b0, 8'd16},
    '{L_POOL, 16'd12, 16'd32, 16'd32, 8'd2, 8'd2, 8'd0, 8'd1,  8'd4,
      8'd16, 8'd0, 1'b0, 8'd1,  8'd0, 1'b0, 8'd16, 8'd0, 1'b0, 1'b0, 8'd16},
    '{L_CONV, 16'd12, 16'd16, 16'd32, 8'd3, 8'd1, 8'd1, 8'd16, 8'd4,
      8'd16, 8'd0, 1'b0, 8'd16, 8'd8, 1'b0, 8'd16, 8'd0, 1'b0, 1'b1, 8'd16},
    '{L_CONV, 16'd26, 16'd16, 16'd16, 8'd3, 8'd2, 8'd0, 8'd8,  8'd4,
      8'd16, 8'd0, 1'b0, 8'd16, 8'd8, 1'b0, 8'd16, 8'd0, 1'b0, 1'b1, 8'd16},
    '{L_CONV, 16'd28, 16'd1,  16'd16, 8'd3, 8'd1, 8'd0, 8'd16, 8'd1,
      8'd16, 8'd0, 1'b0, 8'd16, 8'd8, 1'b0, 8'd16, 8'd0, 1'b0, 1'b1, 8'd16}
  };

  // Parameter-load bus from the control interface to the layers.
  typedef struct packed {
    logic               valid;
    logic [3:0]         layer;
    logic               bias;     // 1: bias memory, 0: weight memory
    logic [6:0]         pe;
    logic [19:0]        addr;     // word address inside the memory
    logic [PARAM_W-1:0] data;     // word, bit 0 = lane 0 of the word
  } param_wr_t;

endpackage
