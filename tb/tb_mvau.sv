// tb_mvau: self-checking test of the matrix-vector-activation unit (MVAU).
// How it works: the MVAU computes a 1x1 convolution: each pixel of a random
// 5 x 6 map of MW = 24 unsigned 4-bit channels is multiplied by the signed
// 4-bit MH x MW weight matrix of reference layer 20 (MH = 8 outputs).
// Folding SIMD = 8, PE = 4 gives SF = 3 input beats and NF = 2 output beats
// (PE accumulators of 24 bits each) per pixel. The weights arrive from the
// reference weight player, once per pixel in (nf, sf) order. Outputs are
// compared lane by lane with the reference accumulators (no thresholds).
// Case A stalls input, weights and output at random; case B runs stall-free
// and checks the rate: NF*SF = 6 cycles per pixel.
// Interface/timing: tb_ref_pkg slots 0 (pixels) and 1 (accumulators);
// watchdog of 50000 cycles.
module tb_mvau;
  import tb_ref_pkg::*;
  localparam int H = 5, W = 6, MW = 24, MH = 8, SIMD = 8, PE = 4, LAY = 20;
  localparam int SF = MW / SIMD, NF = MH / PE, AB = finn_pkg::ACC_BITS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [SIMD*4-1:0] ia, ib;
  logic iav, iar, ibv, ibr;
  logic [127:0] wa, wb;
  logic wav, war, wbv, wbr;
  longint wsa, wsb;
  logic [PE*AB-1:0] oa, ob;
  logic oav, oar, obv, obr;
  int na, ca, fa, nb, cb, fb, pa = 0, pb = 0;
  longint cyc = 0, t0 = -1, t1 = -1;

  mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IBITS(4)) dut_a (.clk, .rst_n,
    .in_tdata(ia), .in_tvalid(iav), .in_tready(iar), .w_tdata(wa[PE*SIMD*4-1:0]), .w_tvalid(wav), .w_tready(war),
    .out_tdata(oa), .out_tvalid(oav), .out_tready(oar));
  tb_wsrc #(.LAYER(LAY)) wsa_u (.clk, .rst_n, .w_tdata(wa), .w_tvalid(wav), .w_tready(war), .sent(wsa));
  tb_fmap_sink #(.C(MH), .B(AB), .LANES(PE), .SLOT(1)) ka (.clk, .rst_n, .tdata(oa), .tvalid(oav), .tready(oar), .beats(na), .checks(ca), .failures(fa));

  mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IBITS(4)) dut_b (.clk, .rst_n,
    .in_tdata(ib), .in_tvalid(ibv), .in_tready(ibr), .w_tdata(wb[PE*SIMD*4-1:0]), .w_tvalid(wbv), .w_tready(wbr),
    .out_tdata(ob), .out_tvalid(obv), .out_tready(obr));
  tb_wsrc #(.LAYER(LAY), .GAPS(1'b0)) wsb_u (.clk, .rst_n, .w_tdata(wb), .w_tvalid(wbv), .w_tready(wbr), .sent(wsb));
  tb_fmap_sink #(.C(MH), .B(AB), .LANES(PE), .SLOT(1), .STALL(1'b0)) kb (.clk, .rst_n, .tdata(ob), .tvalid(obv), .tready(obr), .beats(nb), .checks(cb), .failures(fb));

  // input beat n: pixel n / SF, channels (n % SF)*SIMD ..
  function automatic logic [SIMD*4-1:0] slice_of(int n);
    logic [SIMD*4-1:0] v;
    int p;
    p = (n / SF) % (H*W);
    for (int s = 0; s < SIMD; s++) v[s*4 +: 4] = 4'(src_map[0].get((n % SF)*SIMD + s, p / W, p % W));
    return v;
  endfunction

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      iav <= 0; ibv <= 0; ia <= '0; ib <= '0;
    end else begin
      int na_, nb_;
      na_ = pa + int'(iav && iar);
      nb_ = pb + int'(ibv && ibr);
      pa <= na_; pb <= nb_;
      ia <= slice_of(na_); ib <= slice_of(nb_);
      if (!iav || iar) iav <= (na_ < 2*H*W*SF) && ($urandom_range(0, 3) != 0);
      ibv <= (nb_ < 2*H*W*SF);
      if (obv && obr && nb == H*W*NF) t0 <= cyc;
      if (obv && obr && nb == 2*H*W*NF - 1) t1 <= cyc;
    end
  end

  initial begin
    fmap a;
    int checks, failures;
    a = new(MW, H, W);
    foreach (a.d[i]) a.d[i] = int'(mix(32'(i) + 32'd5) % 16);
    src_map[0] = a;
    ref_map[1] = conv(a, 4, LAY, MH, 1, 1, PE, SIMD, 0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (na == 2*H*W*NF && nb == 2*H*W*NF);
    repeat (30) @(posedge clk);
    checks = ca + cb + 2;
    failures = fa + fb + int'(na != 2*H*W*NF || nb != 2*H*W*NF);
    $display("rate: %0d pixels in %0d cycles (ideal %0d)", H*W, t1 - t0 + 1, H*W*NF*SF);
    if (t1 - t0 + 1 > H*W*NF*SF + 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired: %0d %0d beats", na, nb);
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, fa + fb + 1);
    $finish;
  end
endmodule
