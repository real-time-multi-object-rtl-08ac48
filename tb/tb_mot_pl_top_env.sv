// tb_mot_pl_top_env: the test environment shared by the top-level tests.
// How it works: instantiates mot_pl_top with the given image size and base
// width (tb_mot_pl_top_full is the same bench with the top's defaults),
// AXI memory models for image, weights and outputs, and the threshold
// programmer; starts FRAMES back-to-back frames with one frame_start and
// compares every output word of every frame with the reference network.
// See tb_mot_pl_top for the list of checked mechanisms.
// Timing: the cycle at which each frame's last output word arrives is
// recorded from the output memories' word counts; the frame period is the
// distance between the last two frames. It must stay within twice the
// slowest MVAU's cycles per frame plus 1000: the memory models hold back
// about a third of the bus cycles, and a period near the pipeline latency
// would mean frames are not overlapping.
// Interface: no ports; prints the TB_RESULT line and ends the simulation.
module tb_mot_pl_top_env #(
  parameter int IH       = 192,
  parameter int IW       = 320,
  parameter int BW       = 16,
  parameter int FRAMES   = 1,
  parameter int WATCHDOG = 4000000
);
  import tb_ref_pkg::*;
  localparam int AW = 40, NB = 21, NMV = 48;
  logic clk = 0, rst_n = 0, go = 0, pdone;
  finn_pkg::thr_cfg_t cfg;
  always #5 clk = ~clk;

  logic frame_start = 0, busy, frame_done, dma_err;
  logic [15:0] frames = 16'(FRAMES);
  logic [AW-1:0] img_base, wgt_base;
  logic [2:0][AW-1:0] out_base;
  logic [AW-1:0] img_araddr; logic [7:0] img_arlen; logic [2:0] img_arsize; logic [1:0] img_arburst;
  logic img_arvalid, img_arready; logic [31:0] img_rdata; logic [1:0] img_rresp; logic img_rlast, img_rvalid, img_rready;
  logic [NMV-1:0][AW-1:0] wgt_araddr; logic [NMV-1:0][7:0] wgt_arlen; logic [NMV-1:0][2:0] wgt_arsize;
  logic [NMV-1:0][1:0] wgt_arburst; logic [NMV-1:0] wgt_arvalid, wgt_arready;
  logic [NMV-1:0][127:0] wgt_rdata; logic [NMV-1:0][1:0] wgt_rresp; logic [NMV-1:0] wgt_rlast, wgt_rvalid, wgt_rready;
  logic [2:0][AW-1:0] out_awaddr; logic [2:0][7:0] out_awlen; logic [2:0][2:0] out_awsize; logic [2:0][1:0] out_awburst;
  logic [2:0] out_awvalid, out_awready; logic [2:0][127:0] out_wdata; logic [2:0][15:0] out_wstrb;
  logic [2:0] out_wlast, out_wvalid, out_wready; logic [2:0][1:0] out_bresp; logic [2:0] out_bvalid, out_bready;

  // taps on the accelerator's internal streams, for the mechanism counters
  logic t_in, t_out, t_w;
  logic [3:0] t_skip;
  mot_pl_top #(.IMG_H(IH), .IMG_W(IW), .BW(BW)) dut (.*);
  assign t_in   = dut.img_tvalid && !dut.img_tready;
  assign t_out  = |(dut.o_tvalid & ~dut.o_tready);
  assign t_w    = |(dut.w_tvalid & ~dut.w_tready);
  assign t_skip = {dut.u_accel.u_skip_h4.count > 1, dut.u_accel.u_skip_p5.count > 0,
                   dut.u_accel.u_skip_p4.count > 1, dut.u_accel.u_skip_p3.count > 1};

  int ib, ie, wb [NMV], we [NMV], ob [3], oe [3];
  longint ow [3];
  tb_axi_rd_mem #(.DW(32), .AW(AW), .KIND(1), .FRAMES(FRAMES)) m_img (.clk, .rst_n, .base(img_base),
    .araddr(img_araddr), .arlen(img_arlen), .arsize(img_arsize), .arburst(img_arburst), .arvalid(img_arvalid),
    .arready(img_arready), .rdata(img_rdata), .rresp(img_rresp), .rlast(img_rlast), .rvalid(img_rvalid),
    .rready(img_rready), .bursts(ib), .rule_errs(ie));
  for (genvar i = 0; i < NMV; i++) begin : g_w
    tb_axi_rd_mem #(.DW(128), .AW(AW), .KIND(2), .LAYER(i)) m (.clk, .rst_n, .base(wgt_base),
      .araddr(wgt_araddr[i]), .arlen(wgt_arlen[i]), .arsize(wgt_arsize[i]), .arburst(wgt_arburst[i]),
      .arvalid(wgt_arvalid[i]), .arready(wgt_arready[i]), .rdata(wgt_rdata[i]), .rresp(wgt_rresp[i]),
      .rlast(wgt_rlast[i]), .rvalid(wgt_rvalid[i]), .rready(wgt_rready[i]), .bursts(wb[i]), .rule_errs(we[i]));
  end
  for (genvar j = 0; j < 3; j++) begin : g_o
    tb_axi_wr_mem #(.DW(128), .AW(AW)) m (.clk, .rst_n, .awaddr(out_awaddr[j]), .awlen(out_awlen[j]),
      .awsize(out_awsize[j]), .awburst(out_awburst[j]), .awvalid(out_awvalid[j]), .awready(out_awready[j]),
      .wdata(out_wdata[j]), .wstrb(out_wstrb[j]), .wlast(out_wlast[j]), .wvalid(out_wvalid[j]),
      .wready(out_wready[j]), .bresp(out_bresp[j]), .bvalid(out_bvalid[j]), .bready(out_bready[j]),
      .bursts(ob[j]), .rule_errs(oe[j]), .words(ow[j]));
  end
  tb_thr_prog #(.FIRST(0), .LAST(44)) prog (.clk, .go, .cfg, .done(pdone));

  // mechanism counters (hierarchical taps on the accelerator's streams)
  longint cyc = 0;
  int in_stall = 0, out_stall = 0, w_stall = 0, r_gap = 0, p3 = 0, p4 = 0, p5 = 0, h4 = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (t_in) in_stall <= in_stall + 1;
      if (t_out) out_stall <= out_stall + 1;
      if (t_w) w_stall <= w_stall + 1;
      if (t_skip[0]) p3 <= p3 + 1;
      if (t_skip[1]) p4 <= p4 + 1;
      if (t_skip[2]) p5 <= p5 + 1;
      if (t_skip[3]) h4 <= h4 + 1;
      if (img_rready && !img_rvalid && img_arvalid == 1'b0 && ib > 0) r_gap <= r_gap + 1;
    end
  end

  int checks = 0, failures = 0;
  fmap d [3];
  longint nw [3];                 // output words per frame and head
  longint fdone [FRAMES];         // cycle at which each frame was complete
  int nf = 0;
  always_ff @(posedge clk) begin
    if (rst_n && nf < FRAMES && nw[0] > 0 &&
        ow[0] >= (nf + 1) * nw[0] && ow[1] >= (nf + 1) * nw[1] && ow[2] >= (nf + 1) * nw[2]) begin
      fdone[nf] <= cyc;
      nf <= nf + 1;
    end
  end

  task automatic compare(int j, int f);
    int n;
    longint k0;
    n = d[j].h * d[j].w * NB;
    k0 = longint'(out_base[j] / 16) + longint'(f) * n;
    for (int b = 0; b < n; b++) begin
      logic [127:0] v;
      int p;
      p = b / NB;
      case (j)
        0: v = g_o[0].m.mem.exists(k0 + b) ? g_o[0].m.mem[k0 + b] : 'x;
        1: v = g_o[1].m.mem.exists(k0 + b) ? g_o[1].m.mem[k0 + b] : 'x;
        default: v = g_o[2].m.mem.exists(k0 + b) ? g_o[2].m.mem[k0 + b] : 'x;
      endcase
      for (int l = 0; l < 4; l++) begin
        int want;
        want = d[j].get((b % NB) * 4 + l, p / d[j].w, p % d[j].w);
        checks++;
        if (int'($signed(v[l*32 +: 32])) != want) begin
          failures++;
          if (failures < 6) $display("frame %0d head %0d word %0d lane %0d: got %0d want %0d", f, j, b, l, $signed(v[l*32 +: 32]), want);
        end
      end
    end
  endtask

  initial begin
    fmap img;
    longint ideal, slow, t0, period;
    int werr;
    img_base = 40'h00_1000_0000;
    wgt_base = 40'h00_2000_0040;   // not 4 KiB aligned: bursts must split
    out_base[0] = 40'h00_3000_0000;
    out_base[1] = 40'h00_3100_0000;
    out_base[2] = 40'h00_3200_0000;
    img = image(IH, IW);
    yolo(img, BW, 1, 2, 2, 1, 1, d[0], d[1], d[2]);
    src_map[0] = img;
    ideal = 0;
    slow = 0;
    for (int l = 0; l < NMV; l++) begin
      ideal += longint'(weight_beats(l)) * geo_px[l];
      if (longint'(weight_beats(l)) * geo_px[l] > slow) slow = longint'(weight_beats(l)) * geo_px[l];
    end
    for (int j = 0; j < 3; j++) nw[j] = longint'(d[j].h) * d[j].w * NB;
    go = 1;
    wait (pdone);
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    frame_start = 1;
    t0 = cyc;
    @(negedge clk);
    frame_start = 0;
    @(posedge frame_done);
    @(negedge clk);
    for (int f = 0; f < FRAMES; f++)
      $display("frame %0d complete at cycle %0d after start", f, fdone[f] - t0);
    period = FRAMES > 1 ? fdone[FRAMES-1] - fdone[FRAMES-2] : fdone[0] - t0;
    $display("first-frame latency %0d, frame period %0d cycles (slowest MVAU %0d, sum of all MVAUs %0d)",
             fdone[0] - t0, period, slow, ideal);
    checks += 2;
    if (nf != FRAMES) failures++;
    if (fdone[0] - t0 > ideal + 1000) failures++;
    checks++;
    if (FRAMES > 1 && period > 2 * slow + 1000) failures++;
    for (int f = 0; f < FRAMES; f++)
      for (int j = 0; j < 3; j++) compare(j, f);
    werr = 0;
    for (int i = 0; i < NMV; i++) werr += we[i];
    $display("mechanisms: input stalls %0d, output stalls %0d, weight stalls %0d, read gaps %0d, skip FIFO busy P3 %0d P4 %0d P5 %0d H4 %0d",
             in_stall, out_stall, w_stall, r_gap, p3, p4, p5, h4);
    $display("AXI: image bursts %0d, layer-0 weight bursts %0d, rule violations %0d/%0d/%0d, dma_err %0d",
             ib, wb[0], ie, werr, oe[0] + oe[1] + oe[2], dma_err);
    checks += 9;
    if (in_stall == 0) failures++;
    if (out_stall == 0) failures++;
    if (w_stall == 0) failures++;
    if (r_gap == 0) failures++;
    if (p3 == 0 || p4 == 0 || p5 == 0 || h4 == 0) failures++;
    if (ie + werr + oe[0] + oe[1] + oe[2] != 0) failures++;
    if (dma_err) failures++;
    if (busy) failures++;
    if (wb[1] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
