// tb_thresholding: self-checking test of the multi-threshold activation.
// How it works: random signed 24-bit accumulators for a 4 x 5 map of C = 8
// channels arrive PE = 4 lanes per beat (NF = 2 beats per pixel). Each
// channel gets its own 15 ascending thresholds, written over the
// configuration bus one (channel, index) at a time, plus a broadcast write
// aimed at another layer id that must be ignored. The output code is the
// number of thresholds the value reaches (0..15), compared per lane.
// Random stalls on both sides; a stall-free copy checks the rate of one
// beat per cycle.
// Interface/timing: tb_ref_pkg slot 1 holds the expected codes; watchdog of
// 50000 cycles.
module tb_thresholding;
  import tb_ref_pkg::*;
  localparam int H = 4, W = 5, C = 8, PE = 4, NF = C / PE, AB = finn_pkg::ACC_BITS, LAY = 21;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  finn_pkg::thr_cfg_t cfg;
  logic [PE*AB-1:0] ia, ib;
  logic iav, iar, ibv, ibr;
  logic [PE*4-1:0] oa, ob;
  logic oav, oar, obv, obr;
  int na, ca, fa, nb, cb, fb, pa = 0, pb = 0;
  longint cyc = 0, t0 = -1, t1 = -1;
  fmap acc;

  thresholding #(.C(C), .PE(PE), .IBITS(AB), .OBITS(4), .LAYER_ID(LAY)) dut_a (.clk, .rst_n, .cfg,
    .in_tdata(ia), .in_tvalid(iav), .in_tready(iar), .out_tdata(oa), .out_tvalid(oav), .out_tready(oar));
  tb_fmap_sink #(.C(C), .B(4), .LANES(PE), .SIGNED(1'b0), .SLOT(1)) ka (.clk, .rst_n, .tdata(oa), .tvalid(oav), .tready(oar), .beats(na), .checks(ca), .failures(fa));
  thresholding #(.C(C), .PE(PE), .IBITS(AB), .OBITS(4), .LAYER_ID(LAY)) dut_b (.clk, .rst_n, .cfg,
    .in_tdata(ib), .in_tvalid(ibv), .in_tready(ibr), .out_tdata(ob), .out_tvalid(obv), .out_tready(obr));
  tb_fmap_sink #(.C(C), .B(4), .LANES(PE), .SIGNED(1'b0), .SLOT(1), .STALL(1'b0)) kb (.clk, .rst_n, .tdata(ob), .tvalid(obv), .tready(obr), .beats(nb), .checks(cb), .failures(fb));

  function automatic int thr(int c, int i);
    return (i - 7) * 20 + c * 3;
  endfunction

  function automatic logic [PE*AB-1:0] beat_of(int n);
    logic [PE*AB-1:0] v;
    int p;
    p = (n / NF) % (H*W);
    for (int l = 0; l < PE; l++) v[l*AB +: AB] = AB'(acc.get((n % NF)*PE + l, p / W, p % W));
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
      ia <= beat_of(na_); ib <= beat_of(nb_);
      if (!iav || iar) iav <= (na_ < 2*H*W*NF) && ($urandom_range(0, 3) != 0);
      ibv <= (nb_ < 2*H*W*NF);
      if (obv && obr && nb == H*W*NF) t0 <= cyc;
      if (obv && obr && nb == 2*H*W*NF - 1) t1 <= cyc;
    end
  end

  initial begin
    fmap r;
    int checks, failures;
    cfg = '0;
    acc = new(C, H, W);
    foreach (acc.d[i]) acc.d[i] = int'(mix(32'(i) + 32'd8) % 400) - 200;
    r = new(C, H, W);
    for (int c = 0; c < C; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          int n;
          n = 0;
          for (int i = 0; i < 15; i++) if (acc.get(c, y, x) >= thr(c, i)) n++;
          r.set(c, y, x, n);
        end
    ref_map[1] = r;
    for (int c = 0; c < C; c++)
      for (int i = 0; i < 15; i++) begin
        @(negedge clk);
        cfg = '{we: 1'b1, bcast: 1'b0, layer: 8'(LAY), ch: 12'(c), idx: 4'(i), data: 32'(thr(c, i))};
      end
    for (int i = 0; i < 15; i++) begin   // other layer: must not land here
      @(negedge clk);
      cfg = '{we: 1'b1, bcast: 1'b1, layer: 8'(LAY + 1), ch: '0, idx: 4'(i), data: 32'(1000)};
    end
    @(negedge clk);
    cfg = '0;
    rst_n = 1;
    wait (na == 2*H*W*NF && nb == 2*H*W*NF);
    repeat (30) @(posedge clk);
    checks = ca + cb + 2;
    failures = fa + fb + int'(na != 2*H*W*NF || nb != 2*H*W*NF);
    $display("rate: %0d beats in %0d cycles", H*W*NF, t1 - t0 + 1);
    if (t1 - t0 + 1 > H*W*NF + 2) failures++;
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
