// c2f: the YOLOv8 C2f block (Fig. 3 of the paper).
//
// cv1 (1x1 Conv, CI -> 2c with c = CO/2) feeds a channel Split into two
// halves a and b. b runs through a chain of N Bottlenecks; the block's
// output is cv2 (1x1 Conv, (N+2)c -> CO) applied to the concatenation
// [a, b, m1, ..., mN] of both halves and every Bottleneck output.
//
// Dataflow details that make this work as a stream:
//  * Every branch that skips ahead to the concatenation is forked off with
//    dup_streams and waits in a FIFO sized by finn_pkg::branch_depth for the
//    number of 3x3 convolutions on the longest parallel path, so the joins
//    cannot deadlock.
//  * With SHORTCUT, Bottleneck i outputs 4+i-bit codes (residual additions
//    widen by one bit each), so the concatenation mixes element widths and
//    zero-extends to the widest; cv2 then reads (4+N)-bit inputs. Without
//    shortcut all widths stay 4 bits.
// Weight port order: [0] cv1, [1+2i] and [2+2i] Bottleneck i, [1+2N] cv2.
// Threshold layer ids follow the same order starting at LAYER_ID.
//
// From the paper: the structure, the Split operator, and Concat accepting
// 4-bit and 5-bit inputs. Kernel sizes, c = CO/2 and the widening rule for
// N > 1 follow YOLOv8 / this design's choice.
module c2f #(
  parameter int unsigned H        = 48,
  parameter int unsigned W        = 80,
  parameter int unsigned CI       = 32,
  parameter int unsigned CO       = 32,
  parameter int unsigned N        = 1,
  parameter bit          SHORTCUT = 1'b1,
  parameter int unsigned IBITS    = 4,
  parameter int unsigned SIMD     = 8,
  parameter int unsigned PE       = 4,
  parameter int unsigned LAYER_ID = 2,
  localparam int unsigned NMV     = 2 + 2 * N,
  localparam int unsigned WB      = finn_pkg::WSTREAM_BITS,
  localparam int unsigned OBITS   = finn_pkg::ABITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  finn_pkg::thr_cfg_t    cfg,
  input  logic [CI*IBITS-1:0]   in_tdata,
  input  logic                  in_tvalid,
  output logic                  in_tready,
  input  logic [NMV-1:0][WB-1:0] w_tdata,
  input  logic [NMV-1:0]        w_tvalid,
  output logic [NMV-1:0]        w_tready,
  output logic [CO*OBITS-1:0]   out_tdata,
  output logic                  out_tvalid,
  input  logic                  out_tready
);
  import finn_pkg::*;

  localparam int unsigned CH   = CO / 2;
  localparam int unsigned BMAX = SHORTCUT ? ABITS + N : ABITS;
  localparam int unsigned NE   = N + 2;   // concatenated branches

  // element width of the stream entering Bottleneck i (i = N: leaving the last)
  function automatic int unsigned bs(int unsigned i);
    return SHORTCUT ? ABITS + i : ABITS;
  endfunction

  logic [2*CH*ABITS-1:0] y_tdata;
  logic                  y_tvalid, y_tready;

  logic [CH*BMAX-1:0]    s_tdata [N+1];   // chain streams
  logic [N:0]            s_tvalid, s_tready;
  logic [CH*BMAX-1:0]    e_tdata [NE];    // branches into the concatenation
  logic [NE-1:0]         e_tvalid, e_tready;
  logic [NE*CH*BMAX-1:0] acc_tdata [NE];  // running concatenation
  logic [NE-1:0]         acc_tvalid, acc_tready;

  logic [CH*ABITS-1:0]   a_tdata, b_tdata;
  logic                  a_tvalid, a_tready;

  conv_block #(.H(H), .W(W), .CI(CI), .CO(2*CH), .K(1), .S(1), .IBITS(IBITS),
               .SIMD(SIMD), .PE(PE), .LAYER_ID(LAYER_ID)) u_cv1 (
    .clk, .rst_n, .cfg, .in_tdata, .in_tvalid, .in_tready,
    .w_tdata(w_tdata[0]), .w_tvalid(w_tvalid[0]), .w_tready(w_tready[0]),
    .out_tdata(y_tdata), .out_tvalid(y_tvalid), .out_tready(y_tready));

  stream_split #(.C0(CH), .C1(CH), .B(ABITS)) u_split (
    .clk, .rst_n,
    .in_tdata(y_tdata), .in_tvalid(y_tvalid), .in_tready(y_tready),
    .out0_tdata(a_tdata), .out0_tvalid(a_tvalid), .out0_tready(a_tready),
    .out1_tdata(b_tdata), .out1_tvalid(s_tvalid[0]), .out1_tready(s_tready[0]));
  assign s_tdata[0] = (CH*BMAX)'(b_tdata);

  // branch a waits for the whole Bottleneck chain
  stream_fifo #(.DW(CH*ABITS), .DEPTH(branch_depth(2*N, H, W))) u_qa (
    .clk, .rst_n,
    .in_tdata(a_tdata), .in_tvalid(a_tvalid), .in_tready(a_tready),
    .out_tdata(e_tdata[0][CH*ABITS-1:0]), .out_tvalid(e_tvalid[0]), .out_tready(e_tready[0]),
    .count(), .max_count());
  if (BMAX > ABITS) begin : g_e0pad
    assign e_tdata[0][CH*BMAX-1:CH*ABITS] = '0;
  end

  for (genvar i = 0; i < N; i++) begin : g_m
    localparam int unsigned BI = bs(i);
    localparam int unsigned BN = bs(i + 1);
    logic [CH*BI-1:0] c_tdata, f_tdata, q_tdata;
    logic             c_tvalid, c_tready, f_tvalid, f_tready;
    logic [CH*BN-1:0] m_tdata;

    assign f_tdata = s_tdata[i][CH*BI-1:0];
    dup_streams #(.DW(CH*BI)) u_fork (
      .clk, .rst_n,
      .in_tdata(f_tdata), .in_tvalid(s_tvalid[i]), .in_tready(s_tready[i]),
      .out0_tdata(c_tdata), .out0_tvalid(c_tvalid), .out0_tready(c_tready),
      .out1_tdata(), .out1_tvalid(f_tvalid), .out1_tready(f_tready));

    stream_fifo #(.DW(CH*BI), .DEPTH(branch_depth(2*(N-i), H, W))) u_q (
      .clk, .rst_n,
      .in_tdata(c_tdata), .in_tvalid(c_tvalid), .in_tready(c_tready),
      .out_tdata(q_tdata), .out_tvalid(e_tvalid[i+1]), .out_tready(e_tready[i+1]),
      .count(), .max_count());
    assign e_tdata[i+1] = (CH*BMAX)'(q_tdata);

    bottleneck #(.H(H), .W(W), .C(CH), .IBITS(BI), .SHORTCUT(SHORTCUT),
                 .SIMD(SIMD), .PE(PE), .LAYER_ID(LAYER_ID + 1 + 2*i)) u_bn (
      .clk, .rst_n, .cfg,
      .in_tdata(f_tdata), .in_tvalid(f_tvalid), .in_tready(f_tready),
      .w_tdata(w_tdata[2+2*i:1+2*i]), .w_tvalid(w_tvalid[2+2*i:1+2*i]),
      .w_tready(w_tready[2+2*i:1+2*i]),
      .out_tdata(m_tdata), .out_tvalid(s_tvalid[i+1]), .out_tready(s_tready[i+1]));
    assign s_tdata[i+1] = (CH*BMAX)'(m_tdata);
  end

  // last Bottleneck output joins directly
  assign e_tdata[N+1]  = s_tdata[N];
  assign e_tvalid[N+1] = s_tvalid[N];
  assign s_tready[N]   = e_tready[N+1];

  // concatenation chain: acc[k] = [acc[k-1], e[k]]
  assign acc_tdata[0]  = (NE*CH*BMAX)'(e_tdata[0][CH*ABITS-1:0]);
  assign acc_tvalid[0] = e_tvalid[0];
  assign e_tready[0]   = acc_tready[0];
  for (genvar k = 1; k < NE; k++) begin : g_cat
    localparam int unsigned BA = (k == 1) ? ABITS : bs(k - 2);  // width of acc[k-1]
    localparam int unsigned BE = bs(k - 1);                      // width of e[k]
    localparam int unsigned BO = (BA > BE) ? BA : BE;
    logic [(k+1)*CH*BO-1:0] o_tdata;
    stream_concat #(.C0(k*CH), .B0(BA), .C1(CH), .B1(BE)) u_cat (
      .in0_tdata(acc_tdata[k-1][k*CH*BA-1:0]), .in0_tvalid(acc_tvalid[k-1]), .in0_tready(acc_tready[k-1]),
      .in1_tdata(e_tdata[k][CH*BE-1:0]), .in1_tvalid(e_tvalid[k]), .in1_tready(e_tready[k]),
      .out_tdata(o_tdata), .out_tvalid(acc_tvalid[k]), .out_tready(acc_tready[k]));
    assign acc_tdata[k] = (NE*CH*BMAX)'(o_tdata);
  end

  conv_block #(.H(H), .W(W), .CI(NE*CH), .CO(CO), .K(1), .S(1), .IBITS(BMAX),
               .SIMD(SIMD), .PE(PE), .LAYER_ID(LAYER_ID + 1 + 2*N)) u_cv2 (
    .clk, .rst_n, .cfg,
    .in_tdata(acc_tdata[NE-1][NE*CH*BMAX-1:0]), .in_tvalid(acc_tvalid[NE-1]), .in_tready(acc_tready[NE-1]),
    .w_tdata(w_tdata[NMV-1]), .w_tvalid(w_tvalid[NMV-1]), .w_tready(w_tready[NMV-1]),
    .out_tdata, .out_tvalid, .out_tready);
endmodule
