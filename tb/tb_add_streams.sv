// tb_add_streams: self-checking test of add_streams (the residual add).
// How it works: two random 4 x 6 maps of 7 channels, one of 4-bit and one of
// 5-bit elements, come from independent stalling sources; the sum stream
// (6-bit elements) must equal the element-wise sum, one pixel per beat,
// while the consumer also stalls.
// Interface/timing: sources in tb_ref_pkg slots 0/1, reference in slot 2;
// watchdog of 20000 cycles. No rate is given for this block.
module tb_add_streams;
  import tb_ref_pkg::*;
  localparam int H = 4, W = 6, C = 7, B0 = 4, B1 = 5, BO = 6;
  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;
  logic [C*B0-1:0] a_d;
  logic [C*B1-1:0] b_d;
  logic [C*BO-1:0] o_d;
  logic a_v, a_r, b_v, b_r, o_v, o_r;
  int sa, sb, nb, nc, nf;

  add_streams #(.C(C), .B0(B0), .B1(B1)) dut (
    .in0_tdata(a_d), .in0_tvalid(a_v), .in0_tready(a_r),
    .in1_tdata(b_d), .in1_tvalid(b_v), .in1_tready(b_r),
    .out_tdata(o_d), .out_tvalid(o_v), .out_tready(o_r));
  tb_fmap_src  #(.C(C), .B(B0), .SLOT(0), .FRAMES(2)) s0 (.clk, .rst_n, .go, .tdata(a_d), .tvalid(a_v), .tready(a_r), .sent(sa));
  tb_fmap_src  #(.C(C), .B(B1), .SLOT(1), .FRAMES(2)) s1 (.clk, .rst_n, .go, .tdata(b_d), .tvalid(b_v), .tready(b_r), .sent(sb));
  tb_fmap_sink #(.C(C), .B(BO), .SLOT(2)) k (.clk, .rst_n, .tdata(o_d), .tvalid(o_v), .tready(o_r), .beats(nb), .checks(nc), .failures(nf));

  initial begin
    fmap a, b;
    a = new(C, H, W);
    b = new(C, H, W);
    foreach (a.d[i]) a.d[i] = int'(mix(32'(i) + 32'd41) % 16);
    foreach (b.d[i]) b.d[i] = int'(mix(32'(i) + 32'd43) % 32);
    src_map[0] = a; src_map[1] = b;
    ref_map[2] = add(a, b);
    go = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nb == 2*H*W);
    repeat (30) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", nc + 1, nf + int'(nb != 2*H*W || sa != 2*H*W || sb != 2*H*W));
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired: %0d beats", nb);
    $display("TB_RESULT checks=%0d failures=%0d", nc, nf + 1);
    $finish;
  end
endmodule
