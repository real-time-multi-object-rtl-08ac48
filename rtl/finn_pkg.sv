// finn_pkg: types and constants shared by the streaming YOLOv8n accelerator.
//
// The accelerator is a FINN-style dataflow pipeline: every layer is its own
// hardware stage and the stages are joined by valid/ready streams. Between
// layers a stream beat carries one whole pixel (all channels, channel 0 in
// the least significant bits). Inside a convolution the window generator
// folds a pixel into SIMD-wide slices for the matrix-vector unit.
//
// Numbers taken from the paper: 4-bit weights and activations (so 2^4-1 = 15
// thresholds per channel), an 8-bit RGB input image of 320 x 192 pixels and 84
// output channels per detection-head pixel (4 box values + 80 COCO classes).
// The accumulator width, the weight-stream width, the threshold configuration
// bus and the AXI address width are choices of this design.
package finn_pkg;

  // Quantisation (paper: "quantisation enabled to 4 bits per weight and activation")
  localparam int unsigned WBITS    = 4;   // signed weights
  localparam int unsigned ABITS    = 4;   // unsigned activations after MultiThreshold
  localparam int unsigned NTHRESH  = (1 << ABITS) - 1;  // 2^N - 1 thresholds
  localparam int unsigned ACC_BITS = 24;  // MVAU accumulator / threshold width
  localparam int unsigned IMG_BITS = 8;   // input pixel component width

  // Weight streams: every MVAU receives WLANES weights per beat from its DMA.
  localparam int unsigned WLANES   = 32;
  localparam int unsigned WSTREAM_BITS = WLANES * WBITS;  // 128, width of an AXI HP port

  // Detection head output: 4 box + 80 class channels, each a 32-bit lane
  localparam int unsigned NUM_CLASSES = 80;
  localparam int unsigned DET_CH      = 4 + NUM_CLASSES;
  localparam int unsigned OUT_LANE_BITS = 32;

  localparam int unsigned AXI_ADDR_W = 40;

  // Runtime threshold configuration bus. A write sets threshold `idx` of
  // channel `ch` of the thresholding stage whose LAYER_ID equals `layer`;
  // with `bcast` set it sets that threshold for every channel of the layer.
  typedef struct packed {
    logic        we;
    logic        bcast;
    logic [7:0]  layer;
    logic [11:0] ch;
    logic [3:0]  idx;
    logic [31:0] data;
  } thr_cfg_t;

  function automatic int unsigned max2(int unsigned a, int unsigned b);
    return (a > b) ? a : b;
  endfunction

  function automatic int unsigned min2(int unsigned a, int unsigned b);
    return (a < b) ? a : b;
  endfunction

  // Depth of a FIFO that balances a short branch against a branch holding
  // `nconv` convolutions of kernel 3 / stride 1 on a map W pixels wide: each
  // window generator may hold K+S rows of the padded map, plus some slack for
  // the pipeline registers. Never more than the whole map.
  function automatic int unsigned branch_depth(int unsigned nconv, int unsigned h, int unsigned w);
    int unsigned d;
    d = nconv * (5 * (w + 2) + 16) + 16;
    return (d < h * w + 16) ? d : h * w + 16;
  endfunction

endpackage
