// tb_bottleneck: self-checking test of the C2f bottleneck (two 3x3 conv
// layers with an optional residual add).
// How it works: instance A has the shortcut (5-bit input, 6-bit sum output,
// layers 0/1); instance B has none (4-bit in and out, layers 2/3). Both get
// a random 5 x 7 map of 8 channels twice, weights from the reference weight
// players (with gaps), thresholds over the configuration bus, and random
// output stalls. Every output pixel is compared with the integer reference.
// Instance A's checker also runs without stalls on a third copy that checks
// the rate: each 3x3 conv needs NF*SF = 2*9 cycles per pixel, so a frame
// must take no more than 18*H*W cycles plus the row fill of both layers.
// Interface/timing: slots 0/1 (sources), 0/1/2 (references); watchdog of
// 200000 cycles.
module tb_bottleneck;
  import tb_ref_pkg::*;
  localparam int H = 5, W = 7, C = 8;
  logic clk = 0, rst_n = 0, go = 0, pdone;
  finn_pkg::thr_cfg_t cfg;
  always #5 clk = ~clk;

  logic [C*5-1:0] ai, ri; logic aiv, air, riv, rir; int as_, rs_;
  logic [C*6-1:0] ao, ro; logic aov, aor, rov, ror; int an, ac, af, rn, rc, rf;
  logic [1:0][127:0] aw, rw; logic [1:0] awv, awr, rwv, rwr; longint aws [2], rws [2];
  logic [C*4-1:0] bi, bo; logic biv, bir, bov, bor; int bs_, bn, bc, bf;
  logic [1:0][127:0] bw; logic [1:0] bwv, bwr; longint bws [2];
  longint cyc = 0, t0 = -1, t1 = -1;

  bottleneck #(.H(H), .W(W), .C(C), .IBITS(5), .SHORTCUT(1'b1), .SIMD(8), .PE(4), .LAYER_ID(0)) dut_a (
    .clk, .rst_n, .cfg, .in_tdata(ai), .in_tvalid(aiv), .in_tready(air),
    .w_tdata(aw), .w_tvalid(awv), .w_tready(awr), .out_tdata(ao), .out_tvalid(aov), .out_tready(aor));
  bottleneck #(.H(H), .W(W), .C(C), .IBITS(5), .SHORTCUT(1'b1), .SIMD(8), .PE(4), .LAYER_ID(0)) dut_r (
    .clk, .rst_n, .cfg, .in_tdata(ri), .in_tvalid(riv), .in_tready(rir),
    .w_tdata(rw), .w_tvalid(rwv), .w_tready(rwr), .out_tdata(ro), .out_tvalid(rov), .out_tready(ror));
  bottleneck #(.H(H), .W(W), .C(C), .IBITS(4), .SHORTCUT(1'b0), .SIMD(8), .PE(4), .LAYER_ID(2)) dut_b (
    .clk, .rst_n, .cfg, .in_tdata(bi), .in_tvalid(biv), .in_tready(bir),
    .w_tdata(bw), .w_tvalid(bwv), .w_tready(bwr), .out_tdata(bo), .out_tvalid(bov), .out_tready(bor));
  for (genvar i = 0; i < 2; i++) begin : g_w
    tb_wsrc #(.LAYER(i)) ua (.clk, .rst_n, .w_tdata(aw[i]), .w_tvalid(awv[i]), .w_tready(awr[i]), .sent(aws[i]));
    tb_wsrc #(.LAYER(i), .GAPS(1'b0)) ur (.clk, .rst_n, .w_tdata(rw[i]), .w_tvalid(rwv[i]), .w_tready(rwr[i]), .sent(rws[i]));
    tb_wsrc #(.LAYER(2 + i)) ub (.clk, .rst_n, .w_tdata(bw[i]), .w_tvalid(bwv[i]), .w_tready(bwr[i]), .sent(bws[i]));
  end
  tb_fmap_src  #(.C(C), .B(5), .SLOT(0), .FRAMES(2)) sa (.clk, .rst_n, .go, .tdata(ai), .tvalid(aiv), .tready(air), .sent(as_));
  tb_fmap_sink #(.C(C), .B(6), .SLOT(0)) ka (.clk, .rst_n, .tdata(ao), .tvalid(aov), .tready(aor), .beats(an), .checks(ac), .failures(af));
  tb_fmap_src  #(.C(C), .B(5), .SLOT(0), .FRAMES(2), .STALL(1'b0)) sr (.clk, .rst_n, .go, .tdata(ri), .tvalid(riv), .tready(rir), .sent(rs_));
  tb_fmap_sink #(.C(C), .B(6), .SLOT(0), .STALL(1'b0)) kr (.clk, .rst_n, .tdata(ro), .tvalid(rov), .tready(ror), .beats(rn), .checks(rc), .failures(rf));
  tb_fmap_src  #(.C(C), .B(4), .SLOT(1), .FRAMES(2)) sb (.clk, .rst_n, .go, .tdata(bi), .tvalid(biv), .tready(bir), .sent(bs_));
  tb_fmap_sink #(.C(C), .B(4), .SLOT(1)) kb (.clk, .rst_n, .tdata(bo), .tvalid(bov), .tready(bor), .beats(bn), .checks(bc), .failures(bf));
  tb_thr_prog #(.FIRST(0), .LAST(3)) prog (.clk, .go, .cfg, .done(pdone));

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && rov && ror && rn == H*W) t0 <= cyc;
    if (rst_n && rov && ror && rn == 2*H*W - 1) t1 <= cyc;
  end

  initial begin
    fmap a, b;
    int checks, failures;
    a = new(C, H, W);
    b = new(C, H, W);
    foreach (a.d[i]) a.d[i] = int'(mix(32'(i) + 32'd11) % 32);
    foreach (b.d[i]) b.d[i] = int'(mix(32'(i) + 32'd13) % 16);
    src_map[0] = a; src_map[1] = b;
    ref_map[0] = bottleneck(a, 5, 0, 1);
    ref_map[1] = bottleneck(b, 4, 2, 0);
    go = 1;
    wait (pdone);
    rst_n = 1;
    wait (an == 2*H*W && bn == 2*H*W && rn == 2*H*W);
    repeat (50) @(posedge clk);
    checks = ac + bc + rc + 2;
    failures = af + bf + rf + int'(an != 2*H*W || bn != 2*H*W);
    $display("rate: %0d pixels in %0d cycles (ideal %0d)", H*W, t1 - t0 + 1, 18*H*W);
    if (t1 - t0 + 1 > 18*H*W + 4*W + 40) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired: %0d %0d %0d pixels", an, bn, rn);
    $display("TB_RESULT checks=%0d failures=%0d", ac + bc + rc, af + bf + rf + 1);
    $finish;
  end
endmodule
