// tb_c2f: self-checking test of the C2f block, end to end against the
// integer reference. Two instances run side by side, each for two frames
// with random stalls on every stream: N = 2 with shortcuts (so the
// concatenation joins 4-, 5- and 6-bit branches) and N = 1 without.
// Both use a 6 x 10 map, 16 input and 16 output channels. Thresholds of
// layers 0..13 are written over the configuration bus before reset is
// released. No rate is checked here (the per-layer rate is checked in
// tb_conv_block and tb_bottleneck); the watchdog stops after 400000 cycles.
module tb_c2f;
  import tb_ref_pkg::*;
  localparam int H = 6, W = 10, CI = 16, CO = 16;
  logic clk = 0, rst_n = 0, go = 0, pdone;
  finn_pkg::thr_cfg_t cfg;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // instance A: N = 2, shortcut, layers 0..5
  logic [CI*4-1:0] ai; logic aiv, air; int asent;
  logic [CO*4-1:0] ao; logic aov, aor; int abeats, achk, afail;
  logic [5:0][127:0] aw; logic [5:0] awv, awr; longint awsent [6];
  c2f #(.H(H), .W(W), .CI(CI), .CO(CO), .N(2), .SHORTCUT(1'b1), .IBITS(4), .SIMD(8), .PE(4), .LAYER_ID(0)) dut_a (
    .clk, .rst_n, .cfg, .in_tdata(ai), .in_tvalid(aiv), .in_tready(air),
    .w_tdata(aw), .w_tvalid(awv), .w_tready(awr), .out_tdata(ao), .out_tvalid(aov), .out_tready(aor));
  for (genvar i = 0; i < 6; i++) begin : g_wa
    tb_wsrc #(.LAYER(i)) u (.clk, .rst_n, .w_tdata(aw[i]), .w_tvalid(awv[i]), .w_tready(awr[i]), .sent(awsent[i]));
  end
  tb_fmap_src  #(.C(CI), .B(4), .SLOT(0), .FRAMES(2)) sa (.clk, .rst_n, .go, .tdata(ai), .tvalid(aiv), .tready(air), .sent(asent));
  tb_fmap_sink #(.C(CO), .B(4), .SLOT(0)) ka (.clk, .rst_n, .tdata(ao), .tvalid(aov), .tready(aor), .beats(abeats), .checks(achk), .failures(afail));

  // instance B: N = 1, no shortcut, layers 10..13
  logic [CI*4-1:0] bi; logic biv, bir; int bsent;
  logic [CO*4-1:0] bo; logic bov, bor; int bbeats, bchk, bfail;
  logic [3:0][127:0] bw; logic [3:0] bwv, bwr; longint bwsent [4];
  c2f #(.H(H), .W(W), .CI(CI), .CO(CO), .N(1), .SHORTCUT(1'b0), .IBITS(4), .SIMD(8), .PE(4), .LAYER_ID(10)) dut_b (
    .clk, .rst_n, .cfg, .in_tdata(bi), .in_tvalid(biv), .in_tready(bir),
    .w_tdata(bw), .w_tvalid(bwv), .w_tready(bwr), .out_tdata(bo), .out_tvalid(bov), .out_tready(bor));
  for (genvar i = 0; i < 4; i++) begin : g_wb
    tb_wsrc #(.LAYER(10 + i)) u (.clk, .rst_n, .w_tdata(bw[i]), .w_tvalid(bwv[i]), .w_tready(bwr[i]), .sent(bwsent[i]));
  end
  tb_fmap_src  #(.C(CI), .B(4), .SLOT(1), .FRAMES(2)) sb (.clk, .rst_n, .go, .tdata(bi), .tvalid(biv), .tready(bir), .sent(bsent));
  tb_fmap_sink #(.C(CO), .B(4), .SLOT(1)) kb (.clk, .rst_n, .tdata(bo), .tvalid(bov), .tready(bor), .beats(bbeats), .checks(bchk), .failures(bfail));

  tb_thr_prog #(.FIRST(0), .LAST(13)) prog (.clk, .go, .cfg, .done(pdone));

  initial begin
    fmap in;
    in = new(CI, H, W);
    foreach (in.d[i]) in.d[i] = int'(mix(32'(i) + 32'd5) % 16);
    src_map[0] = in;
    src_map[1] = in;
    ref_map[0] = c2f(in, 4, 0, CO, 2, 1);
    ref_map[1] = c2f(in, 4, 10, CO, 1, 0);
    go = 1;
    wait (pdone);
    rst_n = 1;
    wait (abeats == 2*H*W && bbeats == 2*H*W);
    repeat (50) @(posedge clk);
    checks = achk + bchk + 2;
    failures = afail + bfail;
    if (abeats != 2*H*W) failures++;
    if (bbeats != 2*H*W) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired: A %0d B %0d pixels", abeats, bbeats);
    $display("TB_RESULT checks=%0d failures=%0d", achk + bchk, afail + bfail + 1);
    $finish;
  end
endmodule
