// tb_upsample: self-checking test of the 2x nearest-neighbour upsampler.
// How it works: a random 3 x 5 map of 6 channels is streamed twice; the
// output must be the 6 x 10 map in which every input pixel is repeated in a
// 2 x 2 block, in raster order, under random stalls on both sides.
// A second, stall-free run of the same module checks the rate: the design
// emits one output pixel per cycle, so a frame of 4*H*W pixels must take no
// more than 4*H*W cycles plus a small fill allowance.
// Interface/timing: tb_ref_pkg slots 0 (source) and 1 (reference);
// watchdog of 20000 cycles.
module tb_upsample;
  import tb_ref_pkg::*;
  localparam int H = 3, W = 5, C = 6, B = 4;
  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;
  logic [C*B-1:0] i_d, o_d, j_d, p_d;
  logic i_v, i_r, o_v, o_r, j_v, j_r, p_v, p_r;
  int si, nb, nc, nf, sj, pb, pc, pf;
  longint cyc = 0, t0 = -1, t1 = -1;

  upsample #(.H(H), .W(W), .C(C), .B(B), .F(2)) dut (.clk, .rst_n, .in_tdata(i_d), .in_tvalid(i_v), .in_tready(i_r),
    .out_tdata(o_d), .out_tvalid(o_v), .out_tready(o_r));
  tb_fmap_src  #(.C(C), .B(B), .SLOT(0), .FRAMES(2)) s (.clk, .rst_n, .go, .tdata(i_d), .tvalid(i_v), .tready(i_r), .sent(si));
  tb_fmap_sink #(.C(C), .B(B), .SLOT(1)) k (.clk, .rst_n, .tdata(o_d), .tvalid(o_v), .tready(o_r), .beats(nb), .checks(nc), .failures(nf));

  // stall-free copy for the rate check
  upsample #(.H(H), .W(W), .C(C), .B(B), .F(2)) dut_r (.clk, .rst_n, .in_tdata(j_d), .in_tvalid(j_v), .in_tready(j_r),
    .out_tdata(p_d), .out_tvalid(p_v), .out_tready(p_r));
  tb_fmap_src  #(.C(C), .B(B), .SLOT(0), .FRAMES(2), .STALL(1'b0)) sr (.clk, .rst_n, .go, .tdata(j_d), .tvalid(j_v), .tready(j_r), .sent(sj));
  tb_fmap_sink #(.C(C), .B(B), .SLOT(1), .STALL(1'b0)) kr (.clk, .rst_n, .tdata(p_d), .tvalid(p_v), .tready(p_r), .beats(pb), .checks(pc), .failures(pf));

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && p_v && p_r && pb == 4*H*W) t0 <= cyc;
    if (rst_n && p_v && p_r && pb == 8*H*W - 1) t1 <= cyc;
  end

  initial begin
    fmap a;
    int checks, failures;
    a = new(C, H, W);
    foreach (a.d[i]) a.d[i] = int'(mix(32'(i) + 32'd3) % 16);
    src_map[0] = a;
    ref_map[1] = upsample2(a);
    go = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nb == 8*H*W && pb == 8*H*W);
    repeat (30) @(posedge clk);
    checks = nc + pc + 2;
    failures = nf + pf + int'(nb != 8*H*W || pb != 8*H*W);
    $display("rate: frame 2 took %0d cycles for %0d output pixels", t1 - t0 + 1, 4*H*W);
    if (t1 - t0 + 1 > 4*H*W + 2*W + 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired: %0d %0d beats", nb, pb);
    $display("TB_RESULT checks=%0d failures=%0d", nc + pc, nf + pf + 1);
    $finish;
  end
endmodule
