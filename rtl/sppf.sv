// sppf: the YOLOv8 SPPF block (spatial pyramid pooling, fast; Fig. 3).
//
// cv1 (1x1 Conv, CI -> CI/2) is followed by three max pools in series; the
// cv1 output and the three pooled maps are concatenated (4 x CI/2 channels)
// and reduced by cv2 (1x1 Conv -> CO). In stream form each intermediate map
// is forked: one copy waits in a FIFO for the concatenation while the other
// feeds the next pool. The FIFOs hold a whole map (H*W pixels plus slack),
// which at the 10 x 6 map of the deepest level is small and can never
// deadlock. All streams stay 4 bits wide: max pooling does not widen.
// Weight ports: [0] cv1, [1] cv2. Threshold layer ids LAYER_ID, LAYER_ID+1.
//
// From the paper: the structure (Conv, three Maxpool 2d, Concat, Conv). The
// 5x5/stride 1 pools and CI/2 hidden channels follow YOLOv8.
module sppf #(
  parameter int unsigned H        = 6,
  parameter int unsigned W        = 10,
  parameter int unsigned CI       = 256,
  parameter int unsigned CO       = 256,
  parameter int unsigned SIMD     = 8,
  parameter int unsigned PE       = 4,
  parameter int unsigned POOL_K   = 5,
  parameter int unsigned LAYER_ID = 25,
  localparam int unsigned WB      = finn_pkg::WSTREAM_BITS,
  localparam int unsigned OBITS   = finn_pkg::ABITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  finn_pkg::thr_cfg_t    cfg,
  input  logic [CI*OBITS-1:0]   in_tdata,
  input  logic                  in_tvalid,
  output logic                  in_tready,
  input  logic [1:0][WB-1:0]    w_tdata,
  input  logic [1:0]            w_tvalid,
  output logic [1:0]            w_tready,
  output logic [CO*OBITS-1:0]   out_tdata,
  output logic                  out_tvalid,
  input  logic                  out_tready
);
  import finn_pkg::*;
  localparam int unsigned CH = CI / 2;
  localparam int unsigned D  = H * W + 16;
  localparam int unsigned DB = CH * ABITS;

  // p[0] = cv1 output, p[1..3] = pool outputs
  logic [DB-1:0] p_tdata [4];
  logic [3:0]    p_tvalid, p_tready;
  logic [DB-1:0] f_tdata [3];   // fork to next pool
  logic [2:0]    f_tvalid, f_tready;
  logic [DB-1:0] c_tdata [3];   // fork to FIFO
  logic [2:0]    c_tvalid, c_tready;
  logic [DB-1:0] q_tdata [3];   // FIFO outputs
  logic [2:0]    q_tvalid, q_tready;
  logic [2*DB-1:0] cat1_tdata;
  logic [3*DB-1:0] cat2_tdata;
  logic [4*DB-1:0] cat3_tdata;
  logic            cat1_tvalid, cat1_tready, cat2_tvalid, cat2_tready, cat3_tvalid, cat3_tready;

  conv_block #(.H(H), .W(W), .CI(CI), .CO(CH), .K(1), .S(1), .IBITS(ABITS),
               .SIMD(SIMD), .PE(PE), .LAYER_ID(LAYER_ID)) u_cv1 (
    .clk, .rst_n, .cfg, .in_tdata, .in_tvalid, .in_tready,
    .w_tdata(w_tdata[0]), .w_tvalid(w_tvalid[0]), .w_tready(w_tready[0]),
    .out_tdata(p_tdata[0]), .out_tvalid(p_tvalid[0]), .out_tready(p_tready[0]));

  for (genvar i = 0; i < 3; i++) begin : g_pool
    dup_streams #(.DW(DB)) u_fork (
      .clk, .rst_n,
      .in_tdata(p_tdata[i]), .in_tvalid(p_tvalid[i]), .in_tready(p_tready[i]),
      .out0_tdata(c_tdata[i]), .out0_tvalid(c_tvalid[i]), .out0_tready(c_tready[i]),
      .out1_tdata(f_tdata[i]), .out1_tvalid(f_tvalid[i]), .out1_tready(f_tready[i]));

    stream_fifo #(.DW(DB), .DEPTH(D)) u_q (
      .clk, .rst_n,
      .in_tdata(c_tdata[i]), .in_tvalid(c_tvalid[i]), .in_tready(c_tready[i]),
      .out_tdata(q_tdata[i]), .out_tvalid(q_tvalid[i]), .out_tready(q_tready[i]),
      .count(), .max_count());

    maxpool #(.H(H), .W(W), .C(CH), .B(ABITS), .K(POOL_K), .S(1), .PAD(POOL_K/2)) u_mp (
      .clk, .rst_n,
      .in_tdata(f_tdata[i]), .in_tvalid(f_tvalid[i]), .in_tready(f_tready[i]),
      .out_tdata(p_tdata[i+1]), .out_tvalid(p_tvalid[i+1]), .out_tready(p_tready[i+1]));
  end

  stream_concat #(.C0(CH), .B0(ABITS), .C1(CH), .B1(ABITS)) u_cat1 (
    .in0_tdata(q_tdata[0]), .in0_tvalid(q_tvalid[0]), .in0_tready(q_tready[0]),
    .in1_tdata(q_tdata[1]), .in1_tvalid(q_tvalid[1]), .in1_tready(q_tready[1]),
    .out_tdata(cat1_tdata), .out_tvalid(cat1_tvalid), .out_tready(cat1_tready));
  stream_concat #(.C0(2*CH), .B0(ABITS), .C1(CH), .B1(ABITS)) u_cat2 (
    .in0_tdata(cat1_tdata), .in0_tvalid(cat1_tvalid), .in0_tready(cat1_tready),
    .in1_tdata(q_tdata[2]), .in1_tvalid(q_tvalid[2]), .in1_tready(q_tready[2]),
    .out_tdata(cat2_tdata), .out_tvalid(cat2_tvalid), .out_tready(cat2_tready));
  stream_concat #(.C0(3*CH), .B0(ABITS), .C1(CH), .B1(ABITS)) u_cat3 (
    .in0_tdata(cat2_tdata), .in0_tvalid(cat2_tvalid), .in0_tready(cat2_tready),
    .in1_tdata(p_tdata[3]), .in1_tvalid(p_tvalid[3]), .in1_tready(p_tready[3]),
    .out_tdata(cat3_tdata), .out_tvalid(cat3_tvalid), .out_tready(cat3_tready));

  conv_block #(.H(H), .W(W), .CI(4*CH), .CO(CO), .K(1), .S(1), .IBITS(ABITS),
               .SIMD(SIMD), .PE(PE), .LAYER_ID(LAYER_ID + 1)) u_cv2 (
    .clk, .rst_n, .cfg,
    .in_tdata(cat3_tdata), .in_tvalid(cat3_tvalid), .in_tready(cat3_tready),
    .w_tdata(w_tdata[1]), .w_tvalid(w_tvalid[1]), .w_tready(w_tready[1]),
    .out_tdata, .out_tvalid, .out_tready);
endmodule
