// detect_head: output layer of one detection scale.
//
// Maps every pixel of a CI-channel feature map to DET_CH = 84 raw scores
// (4 box-regression values and 80 class scores) with a 1x1 convolution
// whose weights stream in like those of every other layer. There is no
// thresholding: the accumulators leave the accelerator as they are and the
// final scale factor (and bias) is applied by the processor during
// post-processing, as the paper does with the trailing Mul node.
// Output: PE lanes of 32 bits (sign-extended accumulators) per beat,
// DET_CH/PE beats per pixel, lane 0 of fold f = channel f*PE.
//
// From the paper: 84 channels per pixel for three heads, post-processing on
// the processor. The paper does not give the layers inside the head; a
// single 1x1 convolution is the simplest block producing that output and is
// this design's choice (YOLOv8 itself uses two 3x3 conv branches per head).
module detect_head #(
  parameter int unsigned H     = 24,
  parameter int unsigned W     = 40,
  parameter int unsigned CI    = 64,
  parameter int unsigned IBITS = finn_pkg::ABITS,
  parameter int unsigned NO    = finn_pkg::DET_CH,
  parameter int unsigned SIMD  = 8,
  parameter int unsigned PE    = 4,
  localparam int unsigned WB   = finn_pkg::WSTREAM_BITS,
  localparam int unsigned LB   = finn_pkg::OUT_LANE_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CI*IBITS-1:0]  in_tdata,
  input  logic                 in_tvalid,
  output logic                 in_tready,
  input  logic [WB-1:0]        w_tdata,
  input  logic                 w_tvalid,
  output logic                 w_tready,
  output logic [PE*LB-1:0]     out_tdata,
  output logic                 out_tvalid,
  input  logic                 out_tready
);
  import finn_pkg::*;

  logic [SIMD*IBITS-1:0]  g_tdata;
  logic                   g_tvalid, g_tready;
  logic [PE*ACC_BITS-1:0] m_tdata;

  conv_input_generator #(.IH(H), .IW(W), .C(CI), .B(IBITS), .K(1), .S(1), .SIMD(SIMD)) u_swg (
    .clk, .rst_n, .in_tdata, .in_tvalid, .in_tready,
    .out_tdata(g_tdata), .out_tvalid(g_tvalid), .out_tready(g_tready));

  mvau #(.MW(CI), .MH(NO), .SIMD(SIMD), .PE(PE), .IBITS(IBITS)) u_mvau (
    .clk, .rst_n,
    .in_tdata(g_tdata), .in_tvalid(g_tvalid), .in_tready(g_tready),
    .w_tdata(w_tdata[PE*SIMD*WBITS-1:0]), .w_tvalid, .w_tready,
    .out_tdata(m_tdata), .out_tvalid, .out_tready);

  always_comb
    for (int p = 0; p < PE; p++)
      out_tdata[p*LB +: LB] = LB'($signed(m_tdata[p*ACC_BITS +: ACC_BITS]));
endmodule
