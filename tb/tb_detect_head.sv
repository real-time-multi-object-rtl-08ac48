// tb_detect_head: self-checking test of one detection head (1x1 conv to 84
// raw outputs: 4 box values + 80 class scores, no thresholding).
// How it works: a random 4 x 5 map of 16 channels is streamed twice; each
// pixel produces 84 / PE = 21 beats of four signed 32-bit values, compared
// with the reference accumulators of layer 45. Instance A stalls on all
// sides; instance B runs stall-free and checks the rate: NF*SF = 21*2 = 42
// cycles per pixel.
// Interface/timing: slot 0 source, slot 1 reference; watchdog of 100000
// cycles.
module tb_detect_head;
  import tb_ref_pkg::*;
  localparam int H = 4, W = 5, C = 16, NO = 84, PE = 4, LAY = 45;
  localparam int NB = NO / PE;
  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;
  logic [C*4-1:0] ai, bi; logic aiv, air, biv, bir; int as_, bs_;
  logic [PE*32-1:0] ao, bo; logic aov, aor, bov, bor; int an, ac, af, bn, bc, bf;
  logic [127:0] aw, bw; logic awv, awr, bwv, bwr; longint aws, bws;
  longint cyc = 0, t0 = -1, t1 = -1;

  detect_head #(.H(H), .W(W), .CI(C), .IBITS(4), .NO(NO), .SIMD(8), .PE(PE)) dut_a (.clk, .rst_n,
    .in_tdata(ai), .in_tvalid(aiv), .in_tready(air), .w_tdata(aw), .w_tvalid(awv), .w_tready(awr),
    .out_tdata(ao), .out_tvalid(aov), .out_tready(aor));
  tb_wsrc #(.LAYER(LAY)) wa (.clk, .rst_n, .w_tdata(aw), .w_tvalid(awv), .w_tready(awr), .sent(aws));
  tb_fmap_src  #(.C(C), .B(4), .SLOT(0), .FRAMES(2)) sa (.clk, .rst_n, .go, .tdata(ai), .tvalid(aiv), .tready(air), .sent(as_));
  tb_fmap_sink #(.C(NO), .B(32), .LANES(PE), .SLOT(1)) ka (.clk, .rst_n, .tdata(ao), .tvalid(aov), .tready(aor), .beats(an), .checks(ac), .failures(af));

  detect_head #(.H(H), .W(W), .CI(C), .IBITS(4), .NO(NO), .SIMD(8), .PE(PE)) dut_b (.clk, .rst_n,
    .in_tdata(bi), .in_tvalid(biv), .in_tready(bir), .w_tdata(bw), .w_tvalid(bwv), .w_tready(bwr),
    .out_tdata(bo), .out_tvalid(bov), .out_tready(bor));
  tb_wsrc #(.LAYER(LAY), .GAPS(1'b0)) wb (.clk, .rst_n, .w_tdata(bw), .w_tvalid(bwv), .w_tready(bwr), .sent(bws));
  tb_fmap_src  #(.C(C), .B(4), .SLOT(0), .FRAMES(2), .STALL(1'b0)) sb (.clk, .rst_n, .go, .tdata(bi), .tvalid(biv), .tready(bir), .sent(bs_));
  tb_fmap_sink #(.C(NO), .B(32), .LANES(PE), .SLOT(1), .STALL(1'b0)) kb (.clk, .rst_n, .tdata(bo), .tvalid(bov), .tready(bor), .beats(bn), .checks(bc), .failures(bf));

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && bov && bor && bn == H*W*NB) t0 <= cyc;
    if (rst_n && bov && bor && bn == 2*H*W*NB - 1) t1 <= cyc;
  end

  initial begin
    fmap a;
    int checks, failures;
    a = new(C, H, W);
    foreach (a.d[i]) a.d[i] = int'(mix(32'(i) + 32'd29) % 16);
    src_map[0] = a;
    ref_map[1] = conv(a, 4, LAY, NO, 1, 1, PE, 8, 0);
    go = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (an == 2*H*W*NB && bn == 2*H*W*NB);
    repeat (50) @(posedge clk);
    checks = ac + bc + 2;
    failures = af + bf + int'(an != 2*H*W*NB || bn != 2*H*W*NB);
    $display("rate: %0d pixels in %0d cycles (ideal %0d)", H*W, t1 - t0 + 1, 42*H*W);
    if (t1 - t0 + 1 > 42*H*W + 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired: %0d %0d beats", an, bn);
    $display("TB_RESULT checks=%0d failures=%0d", ac + bc, af + bf + 1);
    $finish;
  end
endmodule
