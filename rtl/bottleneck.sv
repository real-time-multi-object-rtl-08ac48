// bottleneck: the YOLOv8 Bottleneck block, two 3x3 Conv blocks with an
// optional residual addition of the block's input (Fig. 3 of the paper).
//
// With SHORTCUT = 1 the input is forked: one copy goes through the two
// convolutions, the other waits in a FIFO and is added to their result by
// add_streams. The FIFO is the branch-balancing queue: it must hold every
// pixel the two convolutions take in before producing their first output,
// and its depth (finn_pkg::branch_depth) is sized for that. Output width is
// max(IBITS, 4) + 1 bits with the shortcut, 4 bits without.
// Weight ports: w_tdata[0] feeds the first convolution, [1] the second.
// Threshold layer ids LAYER_ID and LAYER_ID+1.
//
// From the paper: the block structure and the shared quantisation scale that
// makes the addition a plain integer add. Kernel size 3 and the hidden width
// equal to C follow YOLOv8's C2f; the FIFO sizing rule is this design's.
module bottleneck #(
  parameter int unsigned H        = 48,
  parameter int unsigned W        = 80,
  parameter int unsigned C        = 16,
  parameter int unsigned IBITS    = 4,
  parameter bit          SHORTCUT = 1'b1,
  parameter int unsigned SIMD     = 8,
  parameter int unsigned PE       = 4,
  parameter int unsigned LAYER_ID = 3,
  localparam int unsigned OBITS   = SHORTCUT ? finn_pkg::max2(IBITS, finn_pkg::ABITS) + 1 : finn_pkg::ABITS,
  localparam int unsigned WB      = finn_pkg::WSTREAM_BITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  finn_pkg::thr_cfg_t    cfg,
  input  logic [C*IBITS-1:0]    in_tdata,
  input  logic                  in_tvalid,
  output logic                  in_tready,
  input  logic [1:0][WB-1:0]    w_tdata,
  input  logic [1:0]            w_tvalid,
  output logic [1:0]            w_tready,
  output logic [C*OBITS-1:0]    out_tdata,
  output logic                  out_tvalid,
  input  logic                  out_tready
);
  import finn_pkg::*;

  logic [C*IBITS-1:0] x_tdata, s_tdata, q_tdata;
  logic               x_tvalid, x_tready, s_tvalid, s_tready, q_tvalid, q_tready;
  logic [C*ABITS-1:0] h_tdata, y_tdata;
  logic               h_tvalid, h_tready, y_tvalid, y_tready;

  if (SHORTCUT) begin : g_sc
    dup_streams #(.DW(C*IBITS)) u_fork (
      .clk, .rst_n, .in_tdata, .in_tvalid, .in_tready,
      .out0_tdata(x_tdata), .out0_tvalid(x_tvalid), .out0_tready(x_tready),
      .out1_tdata(s_tdata), .out1_tvalid(s_tvalid), .out1_tready(s_tready));

    stream_fifo #(.DW(C*IBITS), .DEPTH(branch_depth(2, H, W))) u_skip (
      .clk, .rst_n,
      .in_tdata(s_tdata), .in_tvalid(s_tvalid), .in_tready(s_tready),
      .out_tdata(q_tdata), .out_tvalid(q_tvalid), .out_tready(q_tready),
      .count(), .max_count());

    add_streams #(.C(C), .B0(IBITS), .B1(ABITS)) u_add (
      .in0_tdata(q_tdata), .in0_tvalid(q_tvalid), .in0_tready(q_tready),
      .in1_tdata(y_tdata), .in1_tvalid(y_tvalid), .in1_tready(y_tready),
      .out_tdata, .out_tvalid, .out_tready);
  end else begin : g_nosc
    assign x_tdata    = in_tdata;
    assign x_tvalid   = in_tvalid;
    assign in_tready  = x_tready;
    assign out_tdata  = y_tdata;
    assign out_tvalid = y_tvalid;
    assign y_tready   = out_tready;
  end

  conv_block #(.H(H), .W(W), .CI(C), .CO(C), .K(3), .S(1), .IBITS(IBITS),
               .SIMD(SIMD), .PE(PE), .LAYER_ID(LAYER_ID)) u_cv1 (
    .clk, .rst_n, .cfg,
    .in_tdata(x_tdata), .in_tvalid(x_tvalid), .in_tready(x_tready),
    .w_tdata(w_tdata[0]), .w_tvalid(w_tvalid[0]), .w_tready(w_tready[0]),
    .out_tdata(h_tdata), .out_tvalid(h_tvalid), .out_tready(h_tready));

  conv_block #(.H(H), .W(W), .CI(C), .CO(C), .K(3), .S(1), .IBITS(ABITS),
               .SIMD(SIMD), .PE(PE), .LAYER_ID(LAYER_ID + 1)) u_cv2 (
    .clk, .rst_n, .cfg,
    .in_tdata(h_tdata), .in_tvalid(h_tvalid), .in_tready(h_tready),
    .w_tdata(w_tdata[1]), .w_tvalid(w_tvalid[1]), .w_tready(w_tready[1]),
    .out_tdata(y_tdata), .out_tvalid(y_tvalid), .out_tready(y_tready));
endmodule
