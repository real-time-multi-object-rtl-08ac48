// tb_yolov8_accel: end-to-end test of the streaming YOLOv8n network.
// How it works: a 64 x 64 RGB test image (8-bit) is streamed twice into the
// accelerator built with a reduced base width BW = 8 (the default depths
// 1/2/2/1 and the same folding as the full design). All 48 weight streams
// come from reference weight players with random gaps, the 45 thresholded
// layers are programmed over the configuration bus, and the three head
// outputs (strides 8, 16, 32; 84 signed 32-bit values per pixel, four per
// beat) are compared with the integer reference network, with random
// stalls on every output.
// Mechanisms counted (the test fails if one never happens): input
// back-pressure, output back-pressure, each of the four long skip FIFOs
// (P3, P4, P5, H4) holding data, and weight beats on every stream.
// Rate: the slowest layer bounds the frame time; the test reports the
// cycles of the second frame and fails above the sum of the per-layer
// ideal cycle counts (a pipeline cannot be slower than running its layers
// one after another).
// Interface/timing: slots 0 (image) and 1..3 (head references); watchdog
// of 3,000,000 cycles.
module tb_yolov8_accel;
  import tb_ref_pkg::*;
  localparam int IH = 64, IW = 64, BW = 8;
  localparam int NB = 21;
  logic clk = 0, rst_n = 0, go = 0, pdone;
  finn_pkg::thr_cfg_t cfg;
  always #5 clk = ~clk;

  logic [23:0] id; logic iv, ir; int is_;
  logic [47:0][127:0] w; logic [47:0] wv, wr; longint ws [48];
  logic [2:0][127:0] od; logic [2:0] ov, orr;
  int ob [3], oc [3], of [3];
  int in_stall = 0, out_stall = 0, p3 = 0, p4 = 0, p5 = 0, h4 = 0;
  longint cyc = 0, t0 = -1, t1 = -1;

  yolov8_accel #(.IMG_H(IH), .IMG_W(IW), .BW(BW)) dut (.clk, .rst_n, .cfg,
    .in_tdata(id), .in_tvalid(iv), .in_tready(ir), .w_tdata(w), .w_tvalid(wv), .w_tready(wr),
    .out_tdata(od), .out_tvalid(ov), .out_tready(orr));
  for (genvar i = 0; i < 48; i++) begin : g_w
    tb_wsrc #(.LAYER(i)) u (.clk, .rst_n, .w_tdata(w[i]), .w_tvalid(wv[i]), .w_tready(wr[i]), .sent(ws[i]));
  end
  tb_fmap_src #(.C(3), .B(8), .SLOT(0), .FRAMES(2)) src (.clk, .rst_n, .go, .tdata(id), .tvalid(iv), .tready(ir), .sent(is_));
  for (genvar i = 0; i < 3; i++) begin : g_o
    tb_fmap_sink #(.C(84), .B(32), .LANES(4), .SLOT(1 + i)) k (.clk, .rst_n, .tdata(od[i]), .tvalid(ov[i]),
      .tready(orr[i]), .beats(ob[i]), .checks(oc[i]), .failures(of[i]));
  end
  tb_thr_prog #(.FIRST(0), .LAST(44)) prog (.clk, .go, .cfg, .done(pdone));

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (iv && !ir) in_stall <= in_stall + 1;
      if (|(ov & ~orr)) out_stall <= out_stall + 1;
      if (dut.u_skip_p3.count > 1) p3 <= p3 + 1;
      if (dut.u_skip_p4.count > 1) p4 <= p4 + 1;
      if (dut.u_skip_p5.count > 0) p5 <= p5 + 1;
      if (dut.u_skip_h4.count > 1) h4 <= h4 + 1;
      if (iv && ir && is_ == IH*IW) t0 <= cyc;
      if (ov[0] && orr[0] && ob[0] == 2*NB*(IH/8)*(IW/8) - 1) t1 <= cyc;
    end
  end

  initial begin
    fmap img, d0, d1, d2;
    int checks, failures, nb [3];
    longint ideal, idle_w;
    img = image(IH, IW);
    yolo(img, BW, 1, 2, 2, 1, 1, d0, d1, d2);
    src_map[0] = img;
    ref_map[1] = d0; ref_map[2] = d1; ref_map[3] = d2;
    nb[0] = 2*NB*d0.h*d0.w; nb[1] = 2*NB*d1.h*d1.w; nb[2] = 2*NB*d2.h*d2.w;
    ideal = 0;
    for (int l = 0; l < 48; l++) ideal += longint'(weight_beats(l)) * geo_px[l];
    go = 1;
    wait (pdone);
    rst_n = 1;
    wait (ob[0] == nb[0] && ob[1] == nb[1] && ob[2] == nb[2]);
    repeat (100) @(posedge clk);
    checks = oc[0] + oc[1] + oc[2];
    failures = of[0] + of[1] + of[2];
    checks += 3;
    for (int i = 0; i < 3; i++) if (ob[i] != nb[i]) failures++;
    idle_w = 0;
    for (int l = 0; l < 48; l++) if (ws[l] != 2 * longint'(weight_beats(l)) * geo_px[l]) idle_w++;
    $display("mechanisms: input stalls %0d, output stalls %0d, skip FIFO busy cycles P3 %0d P4 %0d P5 %0d H4 %0d, weight streams off count %0d",
             in_stall, out_stall, p3, p4, p5, h4, idle_w);
    checks += 7;
    if (in_stall == 0) failures++;
    if (out_stall == 0) failures++;
    if (p3 == 0) failures++;
    if (p4 == 0) failures++;
    if (p5 == 0) failures++;
    if (h4 == 0) failures++;
    if (idle_w != 0) failures++;
    $display("frame 2: %0d cycles; sum of per-layer ideal cycles %0d", t1 - t0, ideal);
    checks++;
    if (t1 - t0 > ideal) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog expired: %0d %0d %0d beats", ob[0], ob[1], ob[2]);
    $display("TB_RESULT checks=%0d failures=%0d", oc[0] + oc[1] + oc[2], of[0] + of[1] + of[2] + 1);
    $finish;
  end
endmodule
