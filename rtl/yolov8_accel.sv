// yolov8_accel: streaming dataflow accelerator for the quantised YOLOv8n
// detector (4-bit weights and activations), the "YOLOv8 accelerator" block
// of the programmable logic.
//
// Every layer of the network is a hardware stage of its own and all stages
// work at once on successive pixels of the frame (a FINN-style pipeline).
// The topology is YOLOv8's (Fig. 3 of the paper):
//
//   backbone  Conv s2 -> Conv s2 -> C2f -> Conv s2 -> C2f [P3] -> Conv s2 ->
//             C2f [P4] -> Conv s2 -> C2f -> SPPF [P5]
//   neck      Up(P5) ++ P4 -> C2f [H4];  Up(H4) ++ P3 -> C2f [D3]
//             Conv s2(D3) ++ H4 -> C2f [D4];  Conv s2(D4) ++ P5 -> C2f [D5]
//   heads     detect_head on D3, D4 and D5 (84 channels per pixel)
//
// Channel widths are BW x {1, 2, 4, 8, 16} (BW = 16 for YOLOv8n) and the
// C2f depths N1..N4 = 1, 2, 2, 1 in the backbone and 1 in the neck; these are
// YOLOv8n's values, which the paper uses but does not list. The input is one
// RGB pixel of 3 x 8 bits per beat, IMG_H x IMG_W pixels (320 x 192 in the
// paper), row-major. Each of the three outputs carries DET_CH/4 beats of
// four 32-bit raw scores per pixel of its map (stride 8, 16 and 32).
//
// Weights: 48 matrix-vector units, each with its own weight stream
// (w_tdata[i], 128 bits, fed by its own DMA), in this order:
//   0 conv0, 1 conv1, 2-5 C2f, 6 conv3, 7-12 C2f[P3], 13 conv5,
//   14-19 C2f[P4], 20 conv7, 21-24 C2f, 25-26 SPPF, 27-30 C2f[H4],
//   31-34 C2f[D3], 35 conv16, 36-39 C2f[D4], 40 conv19, 41-44 C2f[D5],
//   45-47 detect heads (scales 8, 16, 32).
// Thresholds: layer ids 0..44 as above (heads have none), via `cfg`.
//
// The four long skip connections (P3, P4, P5 and H4 to the neck
// concatenations) wait in FIFOs that hold two whole maps. One map is
// needed because the other branch of each join passes through the deeper
// levels first; the second lets the next frame pass the fork while the
// current one still waits for its partner, so frames overlap and the frame
// period is set by the slowest stage rather than by the deep path's
// latency (a 64 x 64 test measured 78,215 cycles per frame with one map
// against 18,785 with two). Folding: SIMD 8 x PE 4 everywhere except the first layer (SIMD
// 3 x PE 8); the paper does not give its folding.
module yolov8_accel #(
  parameter int unsigned IMG_H = 192,
  parameter int unsigned IMG_W = 320,
  parameter int unsigned BW    = 16,
  parameter int unsigned N1    = 1,
  parameter int unsigned N2    = 2,
  parameter int unsigned N3    = 2,
  parameter int unsigned N4    = 1,
  parameter int unsigned NH    = 1,
  localparam int unsigned NMV  = 48,
  localparam int unsigned WB   = finn_pkg::WSTREAM_BITS,
  localparam int unsigned OB   = 4 * finn_pkg::OUT_LANE_BITS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  finn_pkg::thr_cfg_t     cfg,
  input  logic [23:0]            in_tdata,
  input  logic                   in_tvalid,
  output logic                   in_tready,
  input  logic [NMV-1:0][WB-1:0] w_tdata,
  input  logic [NMV-1:0]         w_tvalid,
  output logic [NMV-1:0]         w_tready,
  output logic [2:0][OB-1:0]     out_tdata,
  output logic [2:0]             out_tvalid,
  input  logic [2:0]             out_tready
);
  import finn_pkg::*;

  localparam int unsigned A  = ABITS;
  localparam int unsigned SM = 8;   // SIMD of all layers but the first
  localparam int unsigned PM = 4;   // PE of all layers but the first
  // map sizes per stride
  localparam int unsigned H2 = IMG_H / 2,  W2 = IMG_W / 2;
  localparam int unsigned H4 = IMG_H / 4,  W4 = IMG_W / 4;
  localparam int unsigned H8 = IMG_H / 8,  W8 = IMG_W / 8;
  localparam int unsigned H16 = IMG_H / 16, W16 = IMG_W / 16;
  localparam int unsigned H32 = IMG_H / 32, W32 = IMG_W / 32;
  // first weight index of each composite block
  localparam int unsigned I_C2 = 2;
  localparam int unsigned I_C3 = I_C2 + 2 + 2*N1;      // conv3
  localparam int unsigned I_C4 = I_C3 + 1;             // C2f P3
  localparam int unsigned I_C5 = I_C4 + 2 + 2*N2;      // conv5
  localparam int unsigned I_C6 = I_C5 + 1;             // C2f P4
  localparam int unsigned I_C7 = I_C6 + 2 + 2*N3;      // conv7
  localparam int unsigned I_C8 = I_C7 + 1;             // C2f
  localparam int unsigned I_SP = I_C8 + 2 + 2*N4;      // SPPF
  localparam int unsigned I_12 = I_SP + 2;             // C2f H4
  localparam int unsigned I_15 = I_12 + 2 + 2*NH;      // C2f D3
  localparam int unsigned I_16 = I_15 + 2 + 2*NH;      // conv16
  localparam int unsigned I_18 = I_16 + 1;             // C2f D4
  localparam int unsigned I_19 = I_18 + 2 + 2*NH;      // conv19
  localparam int unsigned I_21 = I_19 + 1;             // C2f D5
  localparam int unsigned I_DT = I_21 + 2 + 2*NH;      // heads

  initial begin
    assert (I_DT + 3 == NMV) else $error("weight stream count does not match the layer count");
    assert (IMG_H % 32 == 0 && IMG_W % 32 == 0) else $error("image size must be a multiple of 32");
  end

  // stream declarations: <name>_d / _v / _r
  logic [BW*A-1:0]     c0_d;   logic c0_v, c0_r;
  logic [2*BW*A-1:0]   c1_d;   logic c1_v, c1_r;
  logic [2*BW*A-1:0]   c2_d;   logic c2_v, c2_r;
  logic [4*BW*A-1:0]   c3_d;   logic c3_v, c3_r;
  logic [4*BW*A-1:0]   p3_d;   logic p3_v, p3_r;
  logic [4*BW*A-1:0]   p3a_d;  logic p3a_v, p3a_r;   // to conv5
  logic [4*BW*A-1:0]   p3b_d;  logic p3b_v, p3b_r;   // to skip FIFO
  logic [4*BW*A-1:0]   p3q_d;  logic p3q_v, p3q_r;
  logic [8*BW*A-1:0]   c5_d;   logic c5_v, c5_r;
  logic [8*BW*A-1:0]   p4_d;   logic p4_v, p4_r;
  logic [8*BW*A-1:0]   p4a_d;  logic p4a_v, p4a_r;
  logic [8*BW*A-1:0]   p4b_d;  logic p4b_v, p4b_r;
  logic [8*BW*A-1:0]   p4q_d;  logic p4q_v, p4q_r;
  logic [16*BW*A-1:0]  c7_d;   logic c7_v, c7_r;
  logic [16*BW*A-1:0]  c8_d;   logic c8_v, c8_r;
  logic [16*BW*A-1:0]  p5_d;   logic p5_v, p5_r;
  logic [16*BW*A-1:0]  p5a_d;  logic p5a_v, p5a_r;
  logic [16*BW*A-1:0]  p5b_d;  logic p5b_v, p5b_r;
  logic [16*BW*A-1:0]  p5q_d;  logic p5q_v, p5q_r;
  logic [16*BW*A-1:0]  u1_d;   logic u1_v, u1_r;
  logic [24*BW*A-1:0]  k1_d;   logic k1_v, k1_r;
  logic [8*BW*A-1:0]   h4_d;   logic h4_v, h4_r;
  logic [8*BW*A-1:0]   h4a_d;  logic h4a_v, h4a_r;
  logic [8*BW*A-1:0]   h4b_d;  logic h4b_v, h4b_r;
  logic [8*BW*A-1:0]   h4q_d;  logic h4q_v, h4q_r;
  logic [8*BW*A-1:0]   u2_d;   logic u2_v, u2_r;
  logic [12*BW*A-1:0]  k2_d;   logic k2_v, k2_r;
  logic [4*BW*A-1:0]   d3_d;   logic d3_v, d3_r;
  logic [4*BW*A-1:0]   d3a_d;  logic d3a_v, d3a_r;
  logic [4*BW*A-1:0]   d3b_d;  logic d3b_v, d3b_r;
  logic [4*BW*A-1:0]   c16_d;  logic c16_v, c16_r;
  logic [12*BW*A-1:0]  k3_d;   logic k3_v, k3_r;
  logic [8*BW*A-1:0]   d4_d;   logic d4_v, d4_r;
  logic [8*BW*A-1:0]   d4a_d;  logic d4a_v, d4a_r;
  logic [8*BW*A-1:0]   d4b_d;  logic d4b_v, d4b_r;
  logic [8*BW*A-1:0]   c19_d;  logic c19_v, c19_r;
  logic [24*BW*A-1:0]  k4_d;   logic k4_v, k4_r;
  logic [16*BW*A-1:0]  d5_d;   logic d5_v, d5_r;

  // ---------------- backbone ----------------
  conv_block #(.H(IMG_H), .W(IMG_W), .CI(3), .CO(BW), .K(3), .S(2), .IBITS(IMG_BITS),
               .SIMD(3), .PE(8), .LAYER_ID(0)) u_conv0 (
    .clk, .rst_n, .cfg, .in_tdata, .in_tvalid, .in_tready,
    .w_tdata(w_tdata[0]), .w_tvalid(w_tvalid[0]), .w_tready(w_tready[0]),
    .out_tdata(c0_d), .out_tvalid(c0_v), .out_tready(c0_r));

  conv_block #(.H(H2), .W(W2), .CI(BW), .CO(2*BW), .K(3), .S(2), .IBITS(A),
               .SIMD(SM), .PE(PM), .LAYER_ID(1)) u_conv1 (
    .clk, .rst_n, .cfg, .in_tdata(c0_d), .in_tvalid(c0_v), .in_tready(c0_r),
    .w_tdata(w_tdata[1]), .w_tvalid(w_tvalid[1]), .w_tready(w_tready[1]),
    .out_tdata(c1_d), .out_tvalid(c1_v), .out_tready(c1_r));

  c2f #(.H(H4), .W(W4), .CI(2*BW), .CO(2*BW), .N(N1), .SHORTCUT(1'b1), .IBITS(A),
        .SIMD(SM), .PE(PM), .LAYER_ID(I_C2)) u_c2f2 (
    .clk, .rst_n, .cfg, .in_tdata(c1_d), .in_tvalid(c1_v), .in_tready(c1_r),
    .w_tdata(w_tdata[I_C3-1:I_C2]), .w_tvalid(w_tvalid[I_C3-1:I_C2]), .w_tready(w_tready[I_C3-1:I_C2]),
    .out_tdata(c2_d), .out_tvalid(c2_v), .out_tready(c2_r));

  conv_block #(.H(H4), .W(W4), .CI(2*BW), .CO(4*BW), .K(3), .S(2), .IBITS(A),
               .SIMD(SM), .PE(PM), .LAYER_ID(I_C3)) u_conv3 (
    .clk, .rst_n, .cfg, .in_tdata(c2_d), .in_tvalid(c2_v), .in_tready(c2_r),
    .w_tdata(w_tdata[I_C3]), .w_tvalid(w_tvalid[I_C3]), .w_tready(w_tready[I_C3]),
    .out_tdata(c3_d), .out_tvalid(c3_v), .out_tready(c3_r));

  c2f #(.H(H8), .W(W8), .CI(4*BW), .CO(4*BW), .N(N2), .SHORTCUT(1'b1), .IBITS(A),
        .SIMD(SM), .PE(PM), .LAYER_ID(I_C4)) u_c2f4 (
    .clk, .rst_n, .cfg, .in_tdata(c3_d), .in_tvalid(c3_v), .in_tready(c3_r),
    .w_tdata(w_tdata[I_C5-1:I_C4]), .w_tvalid(w_tvalid[I_C5-1:I_C4]), .w_tready(w_tready[I_C5-1:I_C4]),
    .out_tdata(p3_d), .out_tvalid(p3_v), .out_tready(p3_r));

  dup_streams #(.DW(4*BW*A)) u_fork_p3 (
    .clk, .rst_n, .in_tdata(p3_d), .in_tvalid(p3_v), .in_tready(p3_r),
    .out0_tdata(p3a_d), .out0_tvalid(p3a_v), .out0_tready(p3a_r),
    .out1_tdata(p3b_d), .out1_tvalid(p3b_v), .out1_tready(p3b_r));

  stream_fifo #(.DW(4*BW*A), .DEPTH(2*H8*W8+16)) u_skip_p3 (
    .clk, .rst_n, .in_tdata(p3b_d), .in_tvalid(p3b_v), .in_tready(p3b_r),
    .out_tdata(p3q_d), .out_tvalid(p3q_v), .out_tready(p3q_r), .count(), .max_count());

  conv_block #(.H(H8), .W(W8), .CI(4*BW), .CO(8*BW), .K(3), .S(2), .IBITS(A),
               .SIMD(SM), .PE(PM), .LAYER_ID(I_C5)) u_conv5 (
    .clk, .rst_n, .cfg, .in_tdata(p3a_d), .in_tvalid(p3a_v), .in_tready(p3a_r),
    .w_tdata(w_tdata[I_C5]), .w_tvalid(w_tvalid[I_C5]), .w_tready(w_tready[I_C5]),
    .out_tdata(c5_d), .out_tvalid(c5_v), .out_tready(c5_r));

  c2f #(.H(H16), .W(W16), .CI(8*BW), .CO(8*BW), .N(N3), .SHORTCUT(1'b1), .IBITS(A),
        .SIMD(SM), .PE(PM), .LAYER_ID(I_C6)) u_c2f6 (
    .clk, .rst_n, .cfg, .in_tdata(c5_d), .in_tvalid(c5_v), .in_tready(c5_r),
    .w_tdata(w_tdata[I_C7-1:I_C6]), .w_tvalid(w_tvalid[I_C7-1:I_C6]), .w_tready(w_tready[I_C7-1:I_C6]),
    .out_tdata(p4_d), .out_tvalid(p4_v), .out_tready(p4_r));

  dup_streams #(.DW(8*BW*A)) u_fork_p4 (
    .clk, .rst_n, .in_tdata(p4_d), .in_tvalid(p4_v), .in_tready(p4_r),
    .out0_tdata(p4a_d), .out0_tvalid(p4a_v), .out0_tready(p4a_r),
    .out1_tdata(p4b_d), .out1_tvalid(p4b_v), .out1_tready(p4b_r));

  stream_fifo #(.DW(8*BW*A), .DEPTH(2*H16*W16+16)) u_skip_p4 (
    .clk, .rst_n, .in_tdata(p4b_d), .in_tvalid(p4b_v), .in_tready(p4b_r),
    .out_tdata(p4q_d), .out_tvalid(p4q_v), .out_tready(p4q_r), .count(), .max_count());

  conv_block #(.H(H16), .W(W16), .CI(8*BW), .CO(16*BW), .K(3), .S(2), .IBITS(A),
               .SIMD(SM), .PE(PM), .LAYER_ID(I_C7)) u_conv7 (
    .clk, .rst_n, .cfg, .in_tdata(p4a_d), .in_tvalid(p4a_v), .in_tready(p4a_r),
    .w_tdata(w_tdata[I_C7]), .w_tvalid(w_tvalid[I_C7]), .w_tready(w_tready[I_C7]),
    .out_tdata(c7_d), .out_tvalid(c7_v), .out_tready(c7_r));

  c2f #(.H(H32), .W(W32), .CI(16*BW), .CO(16*BW), .N(N4), .SHORTCUT(1'b1), .IBITS(A),
        .SIMD(SM), .PE(PM), .LAYER_ID(I_C8)) u_c2f8 (
    .clk, .rst_n, .cfg, .in_tdata(c7_d), .in_tvalid(c7_v), .in_tready(c7_r),
    .w_tdata(w_tdata[I_SP-1:I_C8]), .w_tvalid(w_tvalid[I_SP-1:I_C8]), .w_tready(w_tready[I_SP-1:I_C8]),
    .out_tdata(c8_d), .out_tvalid(c8_v), .out_tready(c8_r));

  sppf #(.H(H32), .W(W32), .CI(16*BW), .CO(16*BW), .SIMD(SM), .PE(PM), .LAYER_ID(I_SP)) u_sppf (
    .clk, .rst_n, .cfg, .in_tdata(c8_d), .in_tvalid(c8_v), .in_tready(c8_r),
    .w_tdata(w_tdata[I_SP+1:I_SP]), .w_tvalid(w_tvalid[I_SP+1:I_SP]), .w_tready(w_tready[I_SP+1:I_SP]),
    .out_tdata(p5_d), .out_tvalid(p5_v), .out_tready(p5_r));

  // ---------------- neck, top-down ----------------
  dup_streams #(.DW(16*BW*A)) u_fork_p5 (
    .clk, .rst_n, .in_tdata(p5_d), .in_tvalid(p5_v), .in_tready(p5_r),
    .out0_tdata(p5a_d), .out0_tvalid(p5a_v), .out0_tready(p5a_r),
    .out1_tdata(p5b_d), .out1_tvalid(p5b_v), .out1_tready(p5b_r));

  stream_fifo #(.DW(16*BW*A), .DEPTH(2*H32*W32+16)) u_skip_p5 (
    .clk, .rst_n, .in_tdata(p5b_d), .in_tvalid(p5b_v), .in_tready(p5b_r),
    .out_tdata(p5q_d), .out_tvalid(p5q_v), .out_tready(p5q_r), .count(), .max_count());

  upsample #(.H(H32), .W(W32), .C(16*BW), .B(A), .F(2)) u_up1 (
    .clk, .rst_n, .in_tdata(p5a_d), .in_tvalid(p5a_v), .in_tready(p5a_r),
    .out_tdata(u1_d), .out_tvalid(u1_v), .out_tready(u1_r));

  stream_concat #(.C0(16*BW), .B0(A), .C1(8*BW), .B1(A)) u_cat1 (
    .in0_tdata(u1_d), .in0_tvalid(u1_v), .in0_tready(u1_r),
    .in1_tdata(p4q_d), .in1_tvalid(p4q_v), .in1_tready(p4q_r),
    .out_tdata(k1_d), .out_tvalid(k1_v), .out_tready(k1_r));

  c2f #(.H(H16), .W(W16), .CI(24*BW), .CO(8*BW), .N(NH), .SHORTCUT(1'b0), .IBITS(A),
        .SIMD(SM), .PE(PM), .LAYER_ID(I_12)) u_c2f12 (
    .clk, .rst_n, .cfg, .in_tdata(k1_d), .in_tvalid(k1_v), .in_tready(k1_r),
    .w_tdata(w_tdata[I_15-1:I_12]), .w_tvalid(w_tvalid[I_15-1:I_12]), .w_tready(w_tready[I_15-1:I_12]),
    .out_tdata(h4_d), .out_tvalid(h4_v), .out_tready(h4_r));

  dup_streams #(.DW(8*BW*A)) u_fork_h4 (
    .clk, .rst_n, .in_tdata(h4_d), .in_tvalid(h4_v), .in_tready(h4_r),
    .out0_tdata(h4a_d), .out0_tvalid(h4a_v), .out0_tready(h4a_r),
    .out1_tdata(h4b_d), .out1_tvalid(h4b_v), .out1_tready(h4b_r));

  stream_fifo #(.DW(8*BW*A), .DEPTH(2*H16*W16+16)) u_skip_h4 (
    .clk, .rst_n, .in_tdata(h4b_d), .in_tvalid(h4b_v), .in_tready(h4b_r),
    .out_tdata(h4q_d), .out_tvalid(h4q_v), .out_tready(h4q_r), .count(), .max_count());

  upsample #(.H(H16), .W(W16), .C(8*BW), .B(A), .F(2)) u_up2 (
    .clk, .rst_n, .in_tdata(h4a_d), .in_tvalid(h4a_v), .in_tready(h4a_r),
    .out_tdata(u2_d), .out_tvalid(u2_v), .out_tready(u2_r));

  stream_concat #(.C0(8*BW), .B0(A), .C1(4*BW), .B1(A)) u_cat2 (
    .in0_tdata(u2_d), .in0_tvalid(u2_v), .in0_tready(u2_r),
    .in1_tdata(p3q_d), .in1_tvalid(p3q_v), .in1_tready(p3q_r),
    .out_tdata(k2_d), .out_tvalid(k2_v), .out_tready(k2_r));

  c2f #(.H(H8), .W(W8), .CI(12*BW), .CO(4*BW), .N(NH), .SHORTCUT(1'b0), .IBITS(A),
        .SIMD(SM), .PE(PM), .LAYER_ID(I_15)) u_c2f15 (
    .clk, .rst_n, .cfg, .in_tdata(k2_d), .in_tvalid(k2_v), .in_tready(k2_r),
    .w_tdata(w_tdata[I_16-1:I_15]), .w_tvalid(w_tvalid[I_16-1:I_15]), .w_tready(w_tready[I_16-1:I_15]),
    .out_tdata(d3_d), .out_tvalid(d3_v), .out_tready(d3_r));

  // ---------------- neck, bottom-up ----------------
  dup_streams #(.DW(4*BW*A)) u_fork_d3 (
    .clk, .rst_n, .in_tdata(d3_d), .in_tvalid(d3_v), .in_tready(d3_r),
    .out0_tdata(d3a_d), .out0_tvalid(d3a_v), .out0_tready(d3a_r),
    .out1_tdata(d3b_d), .out1_tvalid(d3b_v), .out1_tready(d3b_r));

  conv_block #(.H(H8), .W(W8), .CI(4*BW), .CO(4*BW), .K(3), .S(2), .IBITS(A),
               .SIMD(SM), .PE(PM), .LAYER_ID(I_16)) u_conv16 (
    .clk, .rst_n, .cfg, .in_tdata(d3a_d), .in_tvalid(d3a_v), .in_tready(d3a_r),
    .w_tdata(w_tdata[I_16]), .w_tvalid(w_tvalid[I_16]), .w_tready(w_tready[I_16]),
    .out_tdata(c16_d), .out_tvalid(c16_v), .out_tready(c16_r));

  stream_concat #(.C0(4*BW), .B0(A), .C1(8*BW), .B1(A)) u_cat3 (
    .in0_tdata(c16_d), .in0_tvalid(c16_v), .in0_tready(c16_r),
    .in1_tdata(h4q_d), .in1_tvalid(h4q_v), .in1_tready(h4q_r),
    .out_tdata(k3_d), .out_tvalid(k3_v), .out_tready(k3_r));

  c2f #(.H(H16), .W(W16), .CI(12*BW), .CO(8*BW), .N(NH), .SHORTCUT(1'b0), .IBITS(A),
        .SIMD(SM), .PE(PM), .LAYER_ID(I_18)) u_c2f18 (
    .clk, .rst_n, .cfg, .in_tdata(k3_d), .in_tvalid(k3_v), .in_tready(k3_r),
    .w_tdata(w_tdata[I_19-1:I_18]), .w_tvalid(w_tvalid[I_19-1:I_18]), .w_tready(w_tready[I_19-1:I_18]),
    .out_tdata(d4_d), .out_tvalid(d4_v), .out_tready(d4_r));

  dup_streams #(.DW(8*BW*A)) u_fork_d4 (
    .clk, .rst_n, .in_tdata(d4_d), .in_tvalid(d4_v), .in_tready(d4_r),
    .out0_tdata(d4a_d), .out0_tvalid(d4a_v), .out0_tready(d4a_r),
    .out1_tdata(d4b_d), .out1_tvalid(d4b_v), .out1_tready(d4b_r));

  conv_block #(.H(H16), .W(W16), .CI(8*BW), .CO(8*BW), .K(3), .S(2), .IBITS(A),
               .SIMD(SM), .PE(PM), .LAYER_ID(I_19)) u_conv19 (
    .clk, .rst_n, .cfg, .in_tdata(d4a_d), .in_tvalid(d4a_v), .in_tready(d4a_r),
    .w_tdata(w_tdata[I_19]), .w_tvalid(w_tvalid[I_19]), .w_tready(w_tready[I_19]),
    .out_tdata(c19_d), .out_tvalid(c19_v), .out_tready(c19_r));

  stream_concat #(.C0(8*BW), .B0(A), .C1(16*BW), .B1(A)) u_cat4 (
    .in0_tdata(c19_d), .in0_tvalid(c19_v), .in0_tready(c19_r),
    .in1_tdata(p5q_d), .in1_tvalid(p5q_v), .in1_tready(p5q_r),
    .out_tdata(k4_d), .out_tvalid(k4_v), .out_tready(k4_r));

  c2f #(.H(H32), .W(W32), .CI(24*BW), .CO(16*BW), .N(NH), .SHORTCUT(1'b0), .IBITS(A),
        .SIMD(SM), .PE(PM), .LAYER_ID(I_21)) u_c2f21 (
    .clk, .rst_n, .cfg, .in_tdata(k4_d), .in_tvalid(k4_v), .in_tready(k4_r),
    .w_tdata(w_tdata[I_DT-1:I_21]), .w_tvalid(w_tvalid[I_DT-1:I_21]), .w_tready(w_tready[I_DT-1:I_21]),
    .out_tdata(d5_d), .out_tvalid(d5_v), .out_tready(d5_r));

  // ---------------- detection heads ----------------
  detect_head #(.H(H8), .W(W8), .CI(4*BW), .SIMD(SM), .PE(PM)) u_det0 (
    .clk, .rst_n, .in_tdata(d3b_d), .in_tvalid(d3b_v), .in_tready(d3b_r),
    .w_tdata(w_tdata[I_DT]), .w_tvalid(w_tvalid[I_DT]), .w_tready(w_tready[I_DT]),
    .out_tdata(out_tdata[0]), .out_tvalid(out_tvalid[0]), .out_tready(out_tready[0]));

  detect_head #(.H(H16), .W(W16), .CI(8*BW), .SIMD(SM), .PE(PM)) u_det1 (
    .clk, .rst_n, .in_tdata(d4b_d), .in_tvalid(d4b_v), .in_tready(d4b_r),
    .w_tdata(w_tdata[I_DT+1]), .w_tvalid(w_tvalid[I_DT+1]), .w_tready(w_tready[I_DT+1]),
    .out_tdata(out_tdata[1]), .out_tvalid(out_tvalid[1]), .out_tready(out_tready[1]));

  detect_head #(.H(H32), .W(W32), .CI(16*BW), .SIMD(SM), .PE(PM)) u_det2 (
    .clk, .rst_n, .in_tdata(d5_d), .in_tvalid(d5_v), .in_tready(d5_r),
    .w_tdata(w_tdata[I_DT+2]), .w_tvalid(w_tvalid[I_DT+2]), .w_tready(w_tready[I_DT+2]),
    .out_tdata(out_tdata[2]), .out_tvalid(out_tvalid[2]), .out_tready(out_tready[2]));
endmodule
