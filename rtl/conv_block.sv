// conv_block: one quantised convolution layer (the "Conv" block of YOLOv8:
// conv2d + batch norm + ReLU + activation quantiser), as FINN deploys it.
//
// Pipeline: fm_padding (PAD = K/2) -> conv_input_generator -> mvau ->
// thresholding -> stream_pack -> output FIFO. Batch norm, ReLU and the
// output quantiser are all absorbed into the thresholds, so the only
// arithmetic is the MVAU's multiply-accumulate and the threshold compares.
// Input: H x W pixels of CI channels x IBITS bits, one pixel per beat.
// Output: OH x OW pixels of CO channels x 4 bits, one pixel per beat, with
// OH = (H + 2*PAD - K)/S + 1. Weights: WSTREAM_BITS-wide beats, of which the
// low PE*SIMD*4 bits are used (see mvau for the order); every output pixel
// needs NF*SF = (CO/PE)*(K*K*CI/SIMD) weight beats, which is also the
// number of cycles the layer spends per output pixel.
//
// From the paper: the decomposition into padding, window generation,
// matrix-vector unit and thresholding (Fig. 6c) and the folding of the
// affine operations into the thresholds. The output FIFO (a few beats deep
// by default) absorbs the burst the MVAU produces at the end of a pixel,
// which is the paper's reason for FIFOs between producer and consumer.
module conv_block #(
  parameter int unsigned H        = 192,
  parameter int unsigned W        = 320,
  parameter int unsigned CI       = 3,
  parameter int unsigned CO       = 16,
  parameter int unsigned K        = 3,
  parameter int unsigned S        = 2,
  parameter int unsigned IBITS    = 8,
  parameter int unsigned SIMD     = 3,
  parameter int unsigned PE       = 8,
  parameter int unsigned LAYER_ID = 0,
  parameter int unsigned OFIFO    = 4,
  localparam int unsigned OBITS   = finn_pkg::ABITS,
  localparam int unsigned PAD     = K / 2,
  localparam int unsigned OH      = (H + 2 * PAD - K) / S + 1,
  localparam int unsigned OW      = (W + 2 * PAD - K) / S + 1,
  localparam int unsigned WB      = finn_pkg::WSTREAM_BITS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  finn_pkg::thr_cfg_t cfg,
  input  logic [CI*IBITS-1:0] in_tdata,
  input  logic               in_tvalid,
  output logic               in_tready,
  input  logic [WB-1:0]      w_tdata,
  input  logic               w_tvalid,
  output logic               w_tready,
  output logic [CO*OBITS-1:0] out_tdata,
  output logic               out_tvalid,
  input  logic               out_tready
);
  import finn_pkg::*;
  localparam int unsigned NF = CO / PE;

  initial begin
    assert (PE * SIMD * WBITS <= WB) else $error("PE*SIMD weights do not fit a weight beat");
  end

  logic [CI*IBITS-1:0]     p_tdata;
  logic                    p_tvalid, p_tready;
  logic [SIMD*IBITS-1:0]   g_tdata;
  logic                    g_tvalid, g_tready;
  logic [PE*ACC_BITS-1:0]  m_tdata;
  logic                    m_tvalid, m_tready;
  logic [PE*OBITS-1:0]     t_tdata;
  logic                    t_tvalid, t_tready;
  logic [CO*OBITS-1:0]     k_tdata;
  logic                    k_tvalid, k_tready;

  fm_padding #(.H(H), .W(W), .C(CI), .B(IBITS), .PAD(PAD)) u_pad (
    .clk, .rst_n, .in_tdata, .in_tvalid, .in_tready,
    .out_tdata(p_tdata), .out_tvalid(p_tvalid), .out_tready(p_tready));

  conv_input_generator #(.IH(H+2*PAD), .IW(W+2*PAD), .C(CI), .B(IBITS), .K(K), .S(S), .SIMD(SIMD)) u_swg (
    .clk, .rst_n,
    .in_tdata(p_tdata), .in_tvalid(p_tvalid), .in_tready(p_tready),
    .out_tdata(g_tdata), .out_tvalid(g_tvalid), .out_tready(g_tready));

  mvau #(.MW(K*K*CI), .MH(CO), .SIMD(SIMD), .PE(PE), .IBITS(IBITS)) u_mvau (
    .clk, .rst_n,
    .in_tdata(g_tdata), .in_tvalid(g_tvalid), .in_tready(g_tready),
    .w_tdata(w_tdata[PE*SIMD*WBITS-1:0]), .w_tvalid, .w_tready,
    .out_tdata(m_tdata), .out_tvalid(m_tvalid), .out_tready(m_tready));

  thresholding #(.C(CO), .PE(PE), .IBITS(ACC_BITS), .OBITS(OBITS), .LAYER_ID(LAYER_ID)) u_thr (
    .clk, .rst_n, .cfg,
    .in_tdata(m_tdata), .in_tvalid(m_tvalid), .in_tready(m_tready),
    .out_tdata(t_tdata), .out_tvalid(t_tvalid), .out_tready(t_tready));

  stream_pack #(.NF(NF), .EW(PE*OBITS)) u_pack (
    .clk, .rst_n,
    .in_tdata(t_tdata), .in_tvalid(t_tvalid), .in_tready(t_tready),
    .out_tdata(k_tdata), .out_tvalid(k_tvalid), .out_tready(k_tready));

  stream_fifo #(.DW(CO*OBITS), .DEPTH(OFIFO)) u_ofifo (
    .clk, .rst_n,
    .in_tdata(k_tdata), .in_tvalid(k_tvalid), .in_tready(k_tready),
    .out_tdata, .out_tvalid, .out_tready,
    .count(), .max_count());
endmodule
