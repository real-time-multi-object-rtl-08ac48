// tb_stream_fifo: self-checking test of stream_fifo.
// How it works: two FIFOs of depth 5 carry the same random 4 x 6 map
// (8 channels x 4 bits) twice. The first sees random stalls on both sides;
// every beat must come out once and in order, the occupancy must never
// exceed the depth, and the high-water mark must reach the depth (the
// consumer stalls long enough to fill it). The second runs without stalls and
// checks the rate: one beat per cycle, so 2*H*W beats within 2*H*W + 4 cycles.
// Interface/timing: tb_ref_pkg slot 0 is both source and reference;
// watchdog of 20000 cycles.
module tb_stream_fifo;
  import tb_ref_pkg::*;
  localparam int H = 4, W = 6, C = 8, B = 4, D = 5;
  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;
  logic [C*B-1:0] i_d, o_d, j_d, p_d;
  logic i_v, i_r, o_v, o_r, j_v, j_r, p_v, p_r, hold = 0;
  logic [$clog2(D+1)-1:0] cnt, mx, cnt2, mx2;
  int si, nb, nc, nf, sj, pb, pc, pf, over = 0;
  longint cyc = 0, t0 = -1, t1 = -1;

  stream_fifo #(.DW(C*B), .DEPTH(D)) dut (.clk, .rst_n, .in_tdata(i_d), .in_tvalid(i_v), .in_tready(i_r),
    .out_tdata(o_d), .out_tvalid(o_v), .out_tready(o_r && !hold), .count(cnt), .max_count(mx));
  tb_fmap_src  #(.C(C), .B(B), .SLOT(0), .FRAMES(2)) s (.clk, .rst_n, .go, .tdata(i_d), .tvalid(i_v), .tready(i_r), .sent(si));
  tb_fmap_sink #(.C(C), .B(B), .SLOT(0)) k (.clk, .rst_n, .tdata(o_d), .tvalid(o_v && !hold), .tready(o_r), .beats(nb), .checks(nc), .failures(nf));

  stream_fifo #(.DW(C*B), .DEPTH(D)) dut_r (.clk, .rst_n, .in_tdata(j_d), .in_tvalid(j_v), .in_tready(j_r),
    .out_tdata(p_d), .out_tvalid(p_v), .out_tready(p_r), .count(cnt2), .max_count(mx2));
  tb_fmap_src  #(.C(C), .B(B), .SLOT(0), .FRAMES(2), .STALL(1'b0)) sr (.clk, .rst_n, .go, .tdata(j_d), .tvalid(j_v), .tready(j_r), .sent(sj));
  tb_fmap_sink #(.C(C), .B(B), .SLOT(0), .STALL(1'b0)) kr (.clk, .rst_n, .tdata(p_d), .tvalid(p_v), .tready(p_r), .beats(pb), .checks(pc), .failures(pf));

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    hold <= (cyc > 20 && cyc < 40);   // long consumer stall: the FIFO must fill
    if (rst_n && int'(cnt) > D) over <= over + 1;
    if (rst_n && j_v && j_r && sj == 0) t0 <= cyc;
    if (rst_n && p_v && p_r && pb == 2*H*W - 1) t1 <= cyc;
  end

  initial begin
    fmap a;
    int checks, failures;
    a = new(C, H, W);
    foreach (a.d[i]) a.d[i] = int'(mix(32'(i) + 32'd9) % 16);
    src_map[0] = a; ref_map[0] = a;
    go = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nb == 2*H*W && pb == 2*H*W);
    repeat (30) @(posedge clk);
    checks = nc + pc + 4;
    failures = nf + pf + int'(nb != 2*H*W || pb != 2*H*W) + int'(over != 0) + int'(int'(mx) != D);
    $display("high-water mark %0d of %0d; stall-free run: %0d beats in %0d cycles", mx, D, 2*H*W, t1 - t0 + 1);
    if (t1 - t0 + 1 > 2*H*W + 4) failures++;
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
