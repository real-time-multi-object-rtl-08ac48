// tb_dup_streams: self-checking test of dup_streams.
// How it works: a random 4 x 6 map of 8 channels x 4 bits is streamed twice
// through the fork. Both outputs go to independent checkers that stall at
// random, so the two consumers accept each beat in different cycles. Each
// output must carry every beat exactly once and in order.
// Interface/timing: fixed-size maps from tb_ref_pkg slots 0; watchdog of
// 20000 cycles. No rate is given in the design description for this block.
module tb_dup_streams;
  import tb_ref_pkg::*;
  localparam int H = 4, W = 6, C = 8, B = 4;
  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;
  logic [C*B-1:0] i_d, o0_d, o1_d;
  logic i_v, i_r, o0_v, o0_r, o1_v, o1_r;
  int sent, b0, b1, c0, c1, f0, f1;

  dup_streams #(.DW(C*B)) dut (.clk, .rst_n, .in_tdata(i_d), .in_tvalid(i_v), .in_tready(i_r),
    .out0_tdata(o0_d), .out0_tvalid(o0_v), .out0_tready(o0_r),
    .out1_tdata(o1_d), .out1_tvalid(o1_v), .out1_tready(o1_r));
  tb_fmap_src  #(.C(C), .B(B), .SLOT(0), .FRAMES(2)) src (.clk, .rst_n, .go, .tdata(i_d), .tvalid(i_v), .tready(i_r), .sent(sent));
  tb_fmap_sink #(.C(C), .B(B), .SLOT(0)) k0 (.clk, .rst_n, .tdata(o0_d), .tvalid(o0_v), .tready(o0_r), .beats(b0), .checks(c0), .failures(f0));
  tb_fmap_sink #(.C(C), .B(B), .SLOT(0)) k1 (.clk, .rst_n, .tdata(o1_d), .tvalid(o1_v), .tready(o1_r), .beats(b1), .checks(c1), .failures(f1));

  initial begin
    int checks, failures;
    fmap m;
    m = new(C, H, W);
    foreach (m.d[i]) m.d[i] = int'(mix(32'(i) + 32'd17) % 16);
    src_map[0] = m; ref_map[0] = m;
    go = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (b0 == 2*H*W && b1 == 2*H*W);
    repeat (30) @(posedge clk);
    checks = c0 + c1 + 1;
    failures = f0 + f1 + int'(b0 != 2*H*W || b1 != 2*H*W);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired: %0d %0d beats", b0, b1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end
endmodule
