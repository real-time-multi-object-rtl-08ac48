// tb_sppf: self-checking test of the SPPF block (1x1 conv to CI/2, three
// chained 5x5 max pools, concatenation of the four maps, 1x1 conv to CO).
// How it works: a random 5 x 6 map of 16 channels is streamed twice into an
// SPPF with CI = CO = 16 (layers 0/1); weights come from the reference
// weight players with gaps, thresholds over the configuration bus, output
// stalls at random. Every output pixel is compared with the reference.
// The frame rate is bound by the pools (25 cycles per pixel each, run in a
// pipeline) and the second conv (NF*SF = 4*4 cycles per pixel); the check
// is that the second frame finishes within twice 25*H*W + 3 row fills +
// 200 (the pools overlap only partly, each waiting for rows of the last).
// Interface/timing: slot 0 source/reference; watchdog of 200000 cycles.
module tb_sppf;
  import tb_ref_pkg::*;
  localparam int H = 5, W = 6, C = 16;
  logic clk = 0, rst_n = 0, go = 0, pdone;
  finn_pkg::thr_cfg_t cfg;
  always #5 clk = ~clk;
  logic [C*4-1:0] ai, ao; logic aiv, air, aov, aor; int as_, an, ac, af;
  logic [1:0][127:0] aw; logic [1:0] awv, awr; longint aws [2];
  longint cyc = 0, t0 = -1, t1 = -1;

  sppf #(.H(H), .W(W), .CI(C), .CO(C), .SIMD(8), .PE(4), .POOL_K(5), .LAYER_ID(0)) dut (
    .clk, .rst_n, .cfg, .in_tdata(ai), .in_tvalid(aiv), .in_tready(air),
    .w_tdata(aw), .w_tvalid(awv), .w_tready(awr), .out_tdata(ao), .out_tvalid(aov), .out_tready(aor));
  for (genvar i = 0; i < 2; i++) begin : g_w
    tb_wsrc #(.LAYER(i)) ua (.clk, .rst_n, .w_tdata(aw[i]), .w_tvalid(awv[i]), .w_tready(awr[i]), .sent(aws[i]));
  end
  tb_fmap_src  #(.C(C), .B(4), .SLOT(0), .FRAMES(2)) sa (.clk, .rst_n, .go, .tdata(ai), .tvalid(aiv), .tready(air), .sent(as_));
  tb_fmap_sink #(.C(C), .B(4), .SLOT(0)) ka (.clk, .rst_n, .tdata(ao), .tvalid(aov), .tready(aor), .beats(an), .checks(ac), .failures(af));
  tb_thr_prog #(.FIRST(0), .LAST(1)) prog (.clk, .go, .cfg, .done(pdone));

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && aov && aor && an == H*W) t0 <= cyc;
    if (rst_n && aov && aor && an == 2*H*W - 1) t1 <= cyc;
  end

  initial begin
    fmap a;
    int checks, failures;
    a = new(C, H, W);
    foreach (a.d[i]) a.d[i] = int'(mix(32'(i) + 32'd19) % 16);
    src_map[0] = a;
    ref_map[0] = sppf(a, 0, C);
    go = 1;
    wait (pdone);
    rst_n = 1;
    wait (an == 2*H*W);
    repeat (50) @(posedge clk);
    checks = ac + 2;
    failures = af + int'(an != 2*H*W);
    $display("frame 2: %0d pixels in %0d cycles", H*W, t1 - t0 + 1);
    if (t1 - t0 + 1 > 2*(25*H*W + 3*(4*W + 20) + 200)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired: %0d pixels", an);
    $display("TB_RESULT checks=%0d failures=%0d", ac, af + 1);
    $finish;
  end
endmodule
