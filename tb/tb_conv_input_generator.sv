// tb_conv_input_generator: self-checking test of the sliding-window unit.
// How it works: a random 7 x 9 map of 8 channels (values 0..7, 4-bit lanes)
// goes, twice, into a 3x3 stride-2 generator with SIMD = 4. For every output
// position the unit must emit K*K*C/SIMD = 18 beats: kernel position major
// (ky, kx), channels inside, SIMD channels per beat - the column order the
// weight matrix uses. The checker sees each beat as 4 lanes of one
// "im2col" reference map of K*K*C channels. Random stalls on both sides.
// A stall-free copy checks the rate: one beat per cycle once the first K
// rows are buffered, i.e. a frame within 18*OH*OW + IW*K + 20 cycles.
// Interface/timing: tb_ref_pkg slots 0 (source) and 1 (im2col reference);
// watchdog of 50000 cycles.
module tb_conv_input_generator;
  import tb_ref_pkg::*;
  localparam int IH = 7, IW = 9, C = 8, B = 4, K = 3, S = 2, SIMD = 4;
  localparam int OH = (IH - K) / S + 1, OW = (IW - K) / S + 1, NB = K*K*C/SIMD;
  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;
  logic [C*B-1:0] i_d, j_d;
  logic [SIMD*B-1:0] o_d, p_d;
  logic i_v, i_r, o_v, o_r, j_v, j_r, p_v, p_r;
  int si, nb, nc, nf, sj, pb, pc, pf;
  longint cyc = 0, t0 = -1, t1 = -1;

  conv_input_generator #(.IH(IH), .IW(IW), .C(C), .B(B), .K(K), .S(S), .SIMD(SIMD)) dut (.clk, .rst_n,
    .in_tdata(i_d), .in_tvalid(i_v), .in_tready(i_r), .out_tdata(o_d), .out_tvalid(o_v), .out_tready(o_r));
  tb_fmap_src  #(.C(C), .B(B), .SLOT(0), .FRAMES(2)) s (.clk, .rst_n, .go, .tdata(i_d), .tvalid(i_v), .tready(i_r), .sent(si));
  tb_fmap_sink #(.C(K*K*C), .B(B), .LANES(SIMD), .SLOT(1)) k (.clk, .rst_n, .tdata(o_d), .tvalid(o_v), .tready(o_r), .beats(nb), .checks(nc), .failures(nf));

  conv_input_generator #(.IH(IH), .IW(IW), .C(C), .B(B), .K(K), .S(S), .SIMD(SIMD)) dut_r (.clk, .rst_n,
    .in_tdata(j_d), .in_tvalid(j_v), .in_tready(j_r), .out_tdata(p_d), .out_tvalid(p_v), .out_tready(p_r));
  tb_fmap_src  #(.C(C), .B(B), .SLOT(0), .FRAMES(2), .STALL(1'b0)) sr (.clk, .rst_n, .go, .tdata(j_d), .tvalid(j_v), .tready(j_r), .sent(sj));
  tb_fmap_sink #(.C(K*K*C), .B(B), .LANES(SIMD), .SLOT(1), .STALL(1'b0)) kr (.clk, .rst_n, .tdata(p_d), .tvalid(p_v), .tready(p_r), .beats(pb), .checks(pc), .failures(pf));

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && j_v && j_r && sj == IH*IW) t0 <= cyc;
    if (rst_n && p_v && p_r && pb == 2*NB*OH*OW - 1) t1 <= cyc;
  end

  initial begin
    fmap a, r;
    int checks, failures;
    a = new(C, IH, IW);
    foreach (a.d[i]) a.d[i] = int'(mix(32'(i) + 32'd61) % 8);
    r = new(K*K*C, OH, OW);
    for (int y = 0; y < OH; y++)
      for (int x = 0; x < OW; x++)
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++)
            for (int c = 0; c < C; c++)
              r.set((ky*K + kx)*C + c, y, x, a.get(c, y*S + ky, x*S + kx));
    src_map[0] = a; ref_map[1] = r;
    go = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nb == 2*NB*OH*OW && pb == 2*NB*OH*OW);
    repeat (30) @(posedge clk);
    checks = nc + pc + 2;
    failures = nf + pf + int'(nb != 2*NB*OH*OW || pb != 2*NB*OH*OW);
    $display("rate: frame 2 took %0d cycles for %0d beats", t1 - t0 + 1, NB*OH*OW);
    if (t1 - t0 + 1 > NB*OH*OW + IW*K + 20) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired: %0d %0d beats", nb, pb);
    $display("TB_RESULT checks=%0d failures=%0d", nc + pc, nf + pf + 1);
    $finish;
  end
endmodule
