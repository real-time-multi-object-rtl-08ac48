// tb_maxpool: self-checking test of the max-pool block.
// How it works: a random 6 x 8 map of 6 channels is streamed twice; the
// output must be the 5 x 5, stride-1, pad-2 max pool of every channel (the
// SPPF pool), in raster order, under random stalls on both sides.
// A second, stall-free run of the same module checks the rate: the window
// generator emits one kernel position per cycle, so a frame of H*W pixels
// must take no more than 25*H*W cycles plus a small fill allowance.
// Interface/timing: tb_ref_pkg slots 0 (source) and 1 (reference);
// watchdog of 20000 cycles.
module tb_maxpool;
  import tb_ref_pkg::*;
  localparam int H = 6, W = 8, C = 6, B = 4;
  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;
  logic [C*B-1:0] i_d, o_d, j_d, p_d;
  logic i_v, i_r, o_v, o_r, j_v, j_r, p_v, p_r;
  int si, nb, nc, nf, sj, pb, pc, pf;
  longint cyc = 0, t0 = -1, t1 = -1;

  maxpool #(.H(H), .W(W), .C(C), .B(B), .K(5), .S(1), .PAD(2)) dut (.clk, .rst_n, .in_tdata(i_d), .in_tvalid(i_v), .in_tready(i_r),
    .out_tdata(o_d), .out_tvalid(o_v), .out_tready(o_r));
  tb_fmap_src  #(.C(C), .B(B), .SLOT(0), .FRAMES(2)) s (.clk, .rst_n, .go, .tdata(i_d), .tvalid(i_v), .tready(i_r), .sent(si));
  tb_fmap_sink #(.C(C), .B(B), .SLOT(1)) k (.clk, .rst_n, .tdata(o_d), .tvalid(o_v), .tready(o_r), .beats(nb), .checks(nc), .failures(nf));

  // stall-free copy for the rate check
  maxpool #(.H(H), .W(W), .C(C), .B(B), .K(5), .S(1), .PAD(2)) dut_r (.clk, .rst_n, .in_tdata(j_d), .in_tvalid(j_v), .in_tready(j_r),
    .out_tdata(p_d), .out_tvalid(p_v), .out_tready(p_r));
  tb_fmap_src  #(.C(C), .B(B), .SLOT(0), .FRAMES(2), .STALL(1'b0)) sr (.clk, .rst_n, .go, .tdata(j_d), .tvalid(j_v), .tready(j_r), .sent(sj));
  tb_fmap_sink #(.C(C), .B(B), .SLOT(1), .STALL(1'b0)) kr (.clk, .rst_n, .tdata(p_d), .tvalid(p_v), .tready(p_r), .beats(pb), .checks(pc), .failures(pf));

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && p_v && p_r && pb == H*W) t0 <= cyc;
    if (rst_n && p_v && p_r && pb == 2*H*W - 1) t1 <= cyc;
  end

  initial begin
    fmap a;
    int checks, failures;
    a = new(C, H, W);
    foreach (a.d[i]) a.d[i] = int'(mix(32'(i) + 32'd3) % 16);
    src_map[0] = a;
    ref_map[1] = maxpool(a, 5);
    go = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nb == 2*H*W && pb == 2*H*W);
    repeat (30) @(posedge clk);
    checks = nc + pc + 2;
    failures = nf + pf + int'(nb != 2*H*W || pb != 2*H*W);
    $display("rate: frame 2 took %0d cycles for %0d output pixels", t1 - t0 + 1, H*W);
    if (t1 - t0 + 1 > 25*H*W + 4*W + 30) failures++;
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
