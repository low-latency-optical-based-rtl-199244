// mt_pkg: types, sizes and helper functions shared by the camera-based
// mode-tracking pipeline.
//
// Frame geometry follows the deployed camera setting: the sensor delivers
// 128x32 pixel frames, eight pixels per stream packet, and the network looks
// only at the centre 32x32 region. The network is the "Optimized" model:
// three 3x3 convolutions with {16,16,24} filters, each followed by ReLU and
// 2x2 max pooling, then dense layers of {42,64} neurons and a 2-neuron output
// (sine and cosine of the n=1 mode), 7-bit weights and per-layer reuse
// factors {1,4,16,48,64,128}.
//
// Activation widths, shifts and the packet metadata layout are choices of
// this design; the network was trained with quantisation-aware training whose
// exact activation formats are not published.
package mt_pkg;

  // ---- stream geometry ---------------------------------------------------
  localparam int unsigned PIX_W     = 12;  // 12-bit grayscale
  localparam int unsigned PPP       = 8;   // pixels per stream packet
  localparam int unsigned PKT_W     = PIX_W * PPP;
  localparam int unsigned IMG_W     = 128; // camera minimum width
  localparam int unsigned IMG_H     = 32;
  localparam int unsigned ROI_W     = 32;
  localparam int unsigned ROI_H     = 32;
  localparam int unsigned N_STRIPES = 8;   // stripes drawn in the reorder figure

  // ---- network ------------------------------------------------------------
  localparam int unsigned W_W    = 7;   // weight width (QAT, 7 bits)
  localparam int unsigned B_W    = 16;  // bias width, accumulator scale
  localparam int unsigned ACC_W  = 26;  // accumulator width
  localparam int unsigned ACT_W  = 8;   // hidden activation width (unsigned, after ReLU)
  localparam int unsigned Y_W    = 11;  // model outputs sine[10:0], cosine[10:0]

  // ---- control request output ---------------------------------------------
  localparam int unsigned N_REQ    = 5;   // five coil requests
  localparam int unsigned DAC_W    = 12;  // unsigned DAC code
  localparam int unsigned DAC_CTL_W = 4;  // appended DAC control bits
  localparam int unsigned WORD_W   = DAC_W + DAC_CTL_W;
  localparam int unsigned COEF_W   = 16;  // signed Q1.14 coil coefficients
  localparam int unsigned COEF_FRAC = 14;

  // Positional metadata carried with every packet.
  typedef struct packed {
    logic sof;  // first packet of a frame
    logic sol;  // first packet of a line
    logic eol;  // last packet of a line
    logic eof;  // last packet of a frame
  } meta_t;

  typedef logic [PKT_W-1:0] pkt_t;

  // One write into the network's parameter memories.
  typedef struct packed {
    logic        en;
    logic [2:0]  layer;   // 0..2 conv0..conv2, 3..5 dense0..dense2
    logic        bias;    // 1: bias memory, 0: weight memory
    logic [15:0] addr;
    logic [15:0] data;    // weights use the low W_W bits, biases all B_W bits
  } param_wr_t;

  // Partition of one layer's MAC work into reuse-factor cycles. The MACs of
  // one output (NIN terms x NOUT channels) are split into blocks of TP terms
  // by CP channels; one block is computed per clock, NIN/TP * NOUT/CP = RF.
  function automatic int unsigned calc_tp(int unsigned nin, int unsigned nout,
                                          int unsigned rf);
    if (nin % rf == 0) return nin / rf;
    if (nout % rf == 0) return nin;
    if (rf % nout == 0 && nin % (rf / nout) == 0) return nin / (rf / nout);
    return 1;
  endfunction

  function automatic int unsigned calc_cp(int unsigned nin, int unsigned nout,
                                          int unsigned rf);
    if (nin % rf == 0) return nout;
    if (nout % rf == 0) return nout / rf;
    return 1;
  endfunction

  function automatic int unsigned clog2_min1(int unsigned v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

endpackage
