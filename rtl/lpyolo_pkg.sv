// lpyolo_pkg: shared constants of the LPYOLO face-detection CNN accelerator.
//
// The network is a reduced TinyYOLOv3: ten quantized convolution layers and
// six 2x2 max-pooling layers, 416x416x3 UINT8 image in, 13x13x18 UINT8 grid
// out (3 anchors x {x, y, w, h, class, confidence} per cell). The channel
// counts, kernel sizes and pooling pattern below are the network's own. The
// bit widths are the 4-bit-weight / 4-bit-activation model, with 8-bit
// weights in the first and last layers, the 8-bit image as input and an
// 8-bit rescaled HardTanh output.
//
// The folding (SIMD input lanes and PE output lanes per layer) is this
// design's own choice: it was picked so that every layer needs at most about
// 1.56 M clock cycles per frame (the first layer is the limit, 9 cycles per
// pixel at SIMD=3), which keeps the whole pipeline well inside one frame per
// 52 ms at 100 MHz.
//
// Configuration bus: the host writes one parameter per clock.
//   cfg_layer : conv layer index 0..9
//   cfg_kind  : CFG_WEIGHT or CFG_ACT
//   cfg_addr  : weight word (nf*SF + sf) or output channel
//   cfg_lane  : weight lane (pe*SIMD + s) or threshold index / affine field
//   cfg_data  : the value, sign-extended, low bits used
package lpyolo_pkg;

  localparam int unsigned NUM_CONV = 10;

  // Per-conv-layer shape (index 0 is the layer that sees the image).
  localparam int unsigned L_CIN   [NUM_CONV] = '{3, 8, 8, 16, 32, 56, 104, 208, 56, 104};
  localparam int unsigned L_COUT  [NUM_CONV] = '{8, 8, 16, 32, 56, 104, 208, 56, 104, 18};
  localparam int unsigned L_KSZ   [NUM_CONV] = '{3, 3, 3, 3, 3, 3, 3, 1, 3, 3};
  // Spatial size of layer i relative to the image: image size >> SHIFT_HW.
  localparam int unsigned L_SHIFT_HW [NUM_CONV] = '{0, 1, 2, 3, 4, 5, 5, 5, 5, 5};
  // Bit widths of the model: WQ-bit signed weights and AQ-bit unsigned
  // activations (mWnA), except 8-bit weights in the first and last layer,
  // the 8-bit image into the first and the 8-bit result out of the last.
  // The default model is 4W4A.
  localparam int unsigned DEF_WQ = 4;
  localparam int unsigned DEF_AQ = 4;

  function automatic int unsigned layer_wbits(int unsigned i, int unsigned wq);
    return (i == 0 || i == NUM_CONV - 1) ? 8 : wq;
  endfunction
  function automatic int unsigned layer_ibits(int unsigned i, int unsigned aq);
    return (i == 0) ? 8 : aq;
  endfunction
  function automatic int unsigned layer_obits(int unsigned i, int unsigned aq);
    return (i == NUM_CONV - 1) ? 8 : aq;
  endfunction
  // Folding.
  localparam int unsigned L_SIMD  [NUM_CONV] = '{3, 8, 8, 8, 8, 8, 8, 8, 8, 8};
  localparam int unsigned L_PE    [NUM_CONV] = '{8, 2, 1, 1, 1, 1, 4, 1, 1, 1};

  // Accumulator width, wide enough for every layer of every evaluated model
  // (largest: layer 0, 255*128*27; last layer of 3W5A, 936*31*128).
  localparam int unsigned ACC_W = 24;

  // Activation kinds of an mvau.
  typedef enum logic {
    ACT_THRESH = 1'b0,   // QuantReLU as 2^OBITS-1 per-channel thresholds
    ACT_AFFINE = 1'b1    // rescaled HardTanh: clamp((acc*mul+bias)>>>shift)
  } act_kind_e;

  // Right shift of the rescaled HardTanh of the last layer.
  localparam int unsigned HT_SHIFT = 16;
  // Field index (cfg_lane) of the two affine parameters.
  localparam int unsigned AFF_MUL  = 0;
  localparam int unsigned AFF_BIAS = 1;

  typedef enum logic {
    CFG_WEIGHT = 1'b0,
    CFG_ACT    = 1'b1
  } cfg_kind_e;

  localparam int unsigned CFG_ADDR_W = 16;
  localparam int unsigned CFG_LANE_W = 8;
  localparam int unsigned CFG_DATA_W = 32;

  // Configuration write, one parameter per beat.
  typedef struct packed {
    logic                  we;
    logic [3:0]            layer;
    cfg_kind_e             kind;
    logic [CFG_ADDR_W-1:0] addr;
    logic [CFG_LANE_W-1:0] lane;
    logic [CFG_DATA_W-1:0] data;
  } cfg_wr_t;

endpackage
