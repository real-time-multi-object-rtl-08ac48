// mot_pl_top: programmable-logic part of the tracking system: the YOLOv8n
// accelerator with the DMA engines that connect it to processor memory.
//
// The processor writes `frames` pre-processed images (IMG_H x IMG_W RGB
// pixels, one 32-bit word 0x00BBGGRR each, row-major, frame after frame)
// to memory and pulses `frame_start`. Then, all at once:
//  * the input DMA streams the image into the accelerator;
//  * 48 weight DMAs, one per matrix-vector unit, stream each layer's filter
//    matrix from processor memory, repeated for every output pixel of the
//    layer and frame (no weights are kept on chip);
//  * three output DMAs write the raw 84-channel score maps of the three
//    detection heads (strides 8, 16, 32) back to memory, frame after frame.
// The frames follow each other through the pipeline without a gap: frame
// n+1 enters the first layers while frame n still drains from the deep
// ones, so the frame period is set by the slowest stage, not by the
// pipeline latency. Every stage counts pixels and wraps at its map size, so
// no frame marker travels with the data. `frame_done` pulses once all
// output maps of all frames are written; decoding, NMS and SORT tracking
// run on the processor, which may consume a frame's outputs as soon as its
// words have arrived.
//
// Memory layout: the weights of all layers lie one after another from
// `wgt_base` in 128-bit words, layer i at wgt_base + 16*W_OFS[i] where W_OFS
// is the running sum of the per-layer buffer sizes (each layer's buffer
// holds (CO/PE) * (K*K*CI/SIMD) words, see mvau for the word layout). Output
// map j is written from out_base[j], four 32-bit scores per word, the
// maps of consecutive frames back to back.
//
// Every DMA has its own AXI4 master port; in the real system a vendor AXI
// interconnect merges them onto the processor's high-performance port, so
// here they are brought out as port arrays. Thresholds are loaded through
// the `cfg` bus before the first frame.
//
// From the paper: the blocks and their connections (Fig. 5), one weights DMA
// per MVAU, weights resident in processor memory, a frame rate that needs
// frames to overlap (Sec. 5). The control ports, the multi-frame start,
// the address layout and the pixel word format are this design's choices.
module mot_pl_top #(
  parameter int unsigned IMG_H = 192,
  parameter int unsigned IMG_W = 320,
  parameter int unsigned BW    = 16,
  parameter int unsigned N1    = 1,
  parameter int unsigned N2    = 2,
  parameter int unsigned N3    = 2,
  parameter int unsigned N4    = 1,
  parameter int unsigned NH    = 1,
  localparam int unsigned NMV  = 48,
  localparam int unsigned AW   = finn_pkg::AXI_ADDR_W,
  localparam int unsigned WB   = finn_pkg::WSTREAM_BITS,
  localparam int unsigned OB   = 4 * finn_pkg::OUT_LANE_BITS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // control
  input  finn_pkg::thr_cfg_t      cfg,
  input  logic                    frame_start,
  input  logic [15:0]             frames,      // frames per start, >= 1
  input  logic [AW-1:0]           img_base,
  input  logic [AW-1:0]           wgt_base,
  input  logic [2:0][AW-1:0]      out_base,
  output logic                    busy,
  output logic                    frame_done,
  output logic                    dma_err,
  // input DMA, AXI4 read master (32-bit)
  output logic [AW-1:0]           img_araddr,
  output logic [7:0]              img_arlen,
  output logic [2:0]              img_arsize,
  output logic [1:0]              img_arburst,
  output logic                    img_arvalid,
  input  logic                    img_arready,
  input  logic [31:0]             img_rdata,
  input  logic [1:0]              img_rresp,
  input  logic                    img_rlast,
  input  logic                    img_rvalid,
  output logic                    img_rready,
  // weight DMAs, AXI4 read masters (128-bit)
  output logic [NMV-1:0][AW-1:0]  wgt_araddr,
  output logic [NMV-1:0][7:0]     wgt_arlen,
  output logic [NMV-1:0][2:0]     wgt_arsize,
  output logic [NMV-1:0][1:0]     wgt_arburst,
  output logic [NMV-1:0]          wgt_arvalid,
  input  logic [NMV-1:0]          wgt_arready,
  input  logic [NMV-1:0][WB-1:0]  wgt_rdata,
  input  logic [NMV-1:0][1:0]     wgt_rresp,
  input  logic [NMV-1:0]          wgt_rlast,
  input  logic [NMV-1:0]          wgt_rvalid,
  output logic [NMV-1:0]          wgt_rready,
  // output DMAs, AXI4 write masters (128-bit)
  output logic [2:0][AW-1:0]      out_awaddr,
  output logic [2:0][7:0]         out_awlen,
  output logic [2:0][2:0]         out_awsize,
  output logic [2:0][1:0]         out_awburst,
  output logic [2:0]              out_awvalid,
  input  logic [2:0]              out_awready,
  output logic [2:0][OB-1:0]      out_wdata,
  output logic [2:0][OB/8-1:0]    out_wstrb,
  output logic [2:0]              out_wlast,
  output logic [2:0]              out_wvalid,
  input  logic [2:0]              out_wready,
  input  logic [2:0][1:0]         out_bresp,
  input  logic [2:0]              out_bvalid,
  output logic [2:0]              out_bready
);
  import finn_pkg::*;

  // ---- per-layer geometry, in the weight-stream order of yolov8_accel ----
  // sel 0: weight words per output pixel, 1: output pixels per frame
  function automatic int unsigned geom(int unsigned idx, int unsigned sel);
    int unsigned k [NMV];
    int unsigned ci[NMV];
    int unsigned co[NMV];
    int unsigned pe[NMV];
    int unsigned sm[NMV];
    int unsigned px[NMV];
    int unsigned n, hw;
    int unsigned cc[5];  // C2f: CI, CO, N, map pixels
    n = 0;
    for (int i = 0; i < NMV; i++) begin
      k[i] = 1; ci[i] = 8; co[i] = 4; pe[i] = 4; sm[i] = 8; px[i] = 1;
    end
    // conv0, conv1
    k[0] = 3; ci[0] = 3; co[0] = BW; pe[0] = 8; sm[0] = 3; px[0] = (IMG_H/2)*(IMG_W/2);
    k[1] = 3; ci[1] = BW; co[1] = 2*BW; px[1] = (IMG_H/4)*(IMG_W/4);
    n = 2;
    // stages: C2f(2BW, N1) conv3 C2f(4BW,N2) conv5 C2f(8BW,N3) conv7 C2f(16BW,N4) SPPF
    //         C2f12 C2f15 conv16 C2f18 conv19 C2f21 heads
    for (int st = 0; st < 10; st++) begin
      // cc = {CI, CO, N, stride-of-map}
      case (st)
        0: begin cc[0] = 2*BW;  cc[1] = 2*BW;  cc[2] = N1; cc[3] = 4;  end
        1: begin cc[0] = 4*BW;  cc[1] = 4*BW;  cc[2] = N2; cc[3] = 8;  end
        2: begin cc[0] = 8*BW;  cc[1] = 8*BW;  cc[2] = N3; cc[3] = 16; end
        3: begin cc[0] = 16*BW; cc[1] = 16*BW; cc[2] = N4; cc[3] = 32; end
        4: begin cc[0] = 24*BW; cc[1] = 8*BW;  cc[2] = NH; cc[3] = 16; end
        5: begin cc[0] = 12*BW; cc[1] = 4*BW;  cc[2] = NH; cc[3] = 8;  end
        6: begin cc[0] = 12*BW; cc[1] = 8*BW;  cc[2] = NH; cc[3] = 16; end
        default: begin cc[0] = 24*BW; cc[1] = 16*BW; cc[2] = NH; cc[3] = 32; end
      endcase
      if (st < 8) begin
        hw = (IMG_H / cc[3]) * (IMG_W / cc[3]);
        // C2f: cv1, bottlenecks, cv2
        ci[n] = cc[0]; co[n] = cc[1]; px[n] = hw; n++;
        for (int j = 0; j < 2 * int'(cc[2]); j++) begin
          k[n] = 3; ci[n] = cc[1] / 2; co[n] = cc[1] / 2; px[n] = hw; n++;
        end
        ci[n] = (cc[2] + 2) * (cc[1] / 2); co[n] = cc[1]; px[n] = hw; n++;
        // the single layer that follows this C2f
        case (st)
          0: begin k[n] = 3; ci[n] = 2*BW; co[n] = 4*BW;  px[n] = (IMG_H/8)*(IMG_W/8);   n++; end
          1: begin k[n] = 3; ci[n] = 4*BW; co[n] = 8*BW;  px[n] = (IMG_H/16)*(IMG_W/16); n++; end
          2: begin k[n] = 3; ci[n] = 8*BW; co[n] = 16*BW; px[n] = (IMG_H/32)*(IMG_W/32); n++; end
          3: begin // SPPF
               ci[n] = 16*BW; co[n] = 8*BW;  px[n] = hw; n++;
               ci[n] = 32*BW; co[n] = 16*BW; px[n] = hw; n++;
             end
          5: begin k[n] = 3; ci[n] = 4*BW; co[n] = 4*BW;  px[n] = (IMG_H/16)*(IMG_W/16); n++; end
          6: begin k[n] = 3; ci[n] = 8*BW; co[n] = 8*BW;  px[n] = (IMG_H/32)*(IMG_W/32); n++; end
          default: ;
        endcase
      end
    end
    // detection heads
    for (int j = 0; j < 3; j++) begin
      ci[n] = (4 << j) * BW; co[n] = DET_CH; px[n] = (IMG_H/(8<<j))*(IMG_W/(8<<j)); n++;
    end
    if (sel == 0) return (co[idx] / pe[idx]) * (k[idx] * k[idx] * ci[idx] / sm[idx]);
    return px[idx];
  endfunction

  function automatic int unsigned w_ofs(int unsigned idx);
    int unsigned s;
    s = 0;
    for (int i = 0; i < int'(idx); i++) s += geom(i, 0);
    return s;
  endfunction

  localparam int unsigned IMG_PIX = IMG_H * IMG_W;

  // ---- streams ----
  logic [31:0]            img_tdata;
  logic                   img_tvalid, img_tready;
  logic [NMV-1:0][WB-1:0] w_tdata;
  logic [NMV-1:0]         w_tvalid, w_tready;
  logic [2:0][OB-1:0]     o_tdata;
  logic [2:0]             o_tvalid, o_tready;
  logic [NMV+3:0]         errs;
  logic [2:0]             o_done, o_busy;
  logic [2:0]             finished;

  dma_mm2s #(.DW(32), .AW(AW)) u_idma (
    .clk, .rst_n, .start(frame_start), .base_addr(img_base),
    .beats(32'(IMG_PIX) * 32'(frames)), .repeats(32'd1), .busy(), .done(), .err(errs[NMV]),
    .m_araddr(img_araddr), .m_arlen(img_arlen), .m_arsize(img_arsize), .m_arburst(img_arburst),
    .m_arvalid(img_arvalid), .m_arready(img_arready),
    .m_rdata(img_rdata), .m_rresp(img_rresp), .m_rlast(img_rlast), .m_rvalid(img_rvalid),
    .m_rready(img_rready),
    .out_tdata(img_tdata), .out_tvalid(img_tvalid), .out_tready(img_tready));

  for (genvar i = 0; i < NMV; i++) begin : g_wdma
    localparam int unsigned BEATS = geom(i, 0);
    localparam int unsigned REPS  = geom(i, 1);
    localparam int unsigned OFS   = w_ofs(i);
    dma_mm2s #(.DW(WB), .AW(AW)) u_wdma (
      .clk, .rst_n, .start(frame_start), .base_addr(wgt_base + AW'(OFS * (WB/8))),
      .beats(32'(BEATS)), .repeats(32'(REPS) * 32'(frames)), .busy(), .done(), .err(errs[i]),
      .m_araddr(wgt_araddr[i]), .m_arlen(wgt_arlen[i]), .m_arsize(wgt_arsize[i]),
      .m_arburst(wgt_arburst[i]), .m_arvalid(wgt_arvalid[i]), .m_arready(wgt_arready[i]),
      .m_rdata(wgt_rdata[i]), .m_rresp(wgt_rresp[i]), .m_rlast(wgt_rlast[i]),
      .m_rvalid(wgt_rvalid[i]), .m_rready(wgt_rready[i]),
      .out_tdata(w_tdata[i]), .out_tvalid(w_tvalid[i]), .out_tready(w_tready[i]));
  end

  yolov8_accel #(.IMG_H(IMG_H), .IMG_W(IMG_W), .BW(BW), .N1(N1), .N2(N2), .N3(N3),
                 .N4(N4), .NH(NH)) u_accel (
    .clk, .rst_n, .cfg,
    .in_tdata(img_tdata[23:0]), .in_tvalid(img_tvalid), .in_tready(img_tready),
    .w_tdata, .w_tvalid, .w_tready,
    .out_tdata(o_tdata), .out_tvalid(o_tvalid), .out_tready(o_tready));

  for (genvar j = 0; j < 3; j++) begin : g_odma
    localparam int unsigned BEATS = (IMG_H / (8 << j)) * (IMG_W / (8 << j)) * DET_CH / 4;
    dma_s2mm #(.DW(OB), .AW(AW)) u_odma (
      .clk, .rst_n, .start(frame_start), .base_addr(out_base[j]), .beats(32'(BEATS) * 32'(frames)),
      .busy(o_busy[j]), .done(o_done[j]), .err(errs[NMV+1+j]),
      .m_awaddr(out_awaddr[j]), .m_awlen(out_awlen[j]), .m_awsize(out_awsize[j]),
      .m_awburst(out_awburst[j]), .m_awvalid(out_awvalid[j]), .m_awready(out_awready[j]),
      .m_wdata(out_wdata[j]), .m_wstrb(out_wstrb[j]), .m_wlast(out_wlast[j]),
      .m_wvalid(out_wvalid[j]), .m_wready(out_wready[j]),
      .m_bresp(out_bresp[j]), .m_bvalid(out_bvalid[j]), .m_bready(out_bready[j]),
      .in_tdata(o_tdata[j]), .in_tvalid(o_tvalid[j]), .in_tready(o_tready[j]));
  end

  assign dma_err = |errs;

  // frame completion: all three output maps written
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      finished   <= '0;
      busy       <= 1'b0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (frame_start) begin
        finished <= '0;
        busy     <= 1'b1;
      end else if (busy) begin
        if (&(finished | o_done)) begin
          busy       <= 1'b0;
          frame_done <= 1'b1;
          finished   <= '0;
        end else begin
          finished <= finished | o_done;
        end
      end
    end
  end
endmodule
