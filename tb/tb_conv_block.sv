// tb_conv_block: self-checking test of one quantised convolution layer.
// Two cases in one run, each over two frames so the frame restart is
// exercised: a 3x3 stride-2 and (second instance) a 3x3 stride-1 layer,
// both 16 -> 8 channels on a 7 x 9 map of 4-bit activations. Weights come
// from tb_wsrc (the reference weights), thresholds are programmed over the
// configuration bus, and every output pixel is compared with the integer
// reference convolution + thresholding of tb_ref_pkg. The stride-1 case runs
// without stalls and checks the rate: one output pixel per NF*SF cycles
// (NF = 8/4, SF = 9*16/8), within 10 % plus the fill of the first rows.
module tb_conv_block;
  import tb_ref_pkg::*;
  localparam int H = 7, W = 9, CI = 16, CO = 8;
  localparam int LA = 5, LB = 6;
  logic clk = 0, rst_n = 0;
  finn_pkg::thr_cfg_t cfg;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fmap img, ref_a, ref_b;

  // ---- case A: stride 2, random stalls everywhere ----
  logic [CI*4-1:0] a_in;  logic a_iv, a_ir;
  logic [127:0] a_w;      logic a_wv, a_wr;
  logic [CO*4-1:0] a_out; logic a_ov, a_or;
  longint a_sent;
  conv_block #(.H(H), .W(W), .CI(CI), .CO(CO), .K(3), .S(2), .IBITS(4), .SIMD(8), .PE(4), .LAYER_ID(LA)) dut_a (
    .clk, .rst_n, .cfg, .in_tdata(a_in), .in_tvalid(a_iv), .in_tready(a_ir),
    .w_tdata(a_w), .w_tvalid(a_wv), .w_tready(a_wr),
    .out_tdata(a_out), .out_tvalid(a_ov), .out_tready(a_or));
  tb_wsrc #(.LAYER(LA), .GAPS(1)) wsa (.clk, .rst_n, .w_tdata(a_w), .w_tvalid(a_wv), .w_tready(a_wr), .sent(a_sent));

  // ---- case B: stride 1, no stalls ----
  logic [CI*4-1:0] b_in;  logic b_iv, b_ir;
  logic [127:0] b_w;      logic b_wv, b_wr;
  logic [CO*4-1:0] b_out; logic b_ov, b_or;
  longint b_sent;
  conv_block #(.H(H), .W(W), .CI(CI), .CO(CO), .K(3), .S(1), .IBITS(4), .SIMD(8), .PE(4), .LAYER_ID(LB)) dut_b (
    .clk, .rst_n, .cfg, .in_tdata(b_in), .in_tvalid(b_iv), .in_tready(b_ir),
    .w_tdata(b_w), .w_tvalid(b_wv), .w_tready(b_wr),
    .out_tdata(b_out), .out_tvalid(b_ov), .out_tready(b_or));
  tb_wsrc #(.LAYER(LB), .GAPS(0)) wsb (.clk, .rst_n, .w_tdata(b_w), .w_tvalid(b_wv), .w_tready(b_wr), .sent(b_sent));

  function automatic logic [CI*4-1:0] in_pix(int p);
    logic [CI*4-1:0] v;
    for (int c = 0; c < CI; c++) v[c*4 +: 4] = 4'(img.get(c, (p % (H*W)) / W, p % W));
    return v;
  endfunction

  int a_ip = 0, b_ip = 0, a_op = 0, b_op = 0;
  longint cyc = 0, b_first = 0, b_last = 0;
  always_comb a_in = in_pix(a_ip);
  always_comb b_in = in_pix(b_ip);

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (a_iv && a_ir) a_ip <= a_ip + 1;
      if (!a_iv || a_ir) a_iv <= (a_ip + (a_iv && a_ir) < 2*H*W) && ($urandom_range(0, 3) != 0);
      a_or <= ($urandom_range(0, 2) != 0);
      if (b_iv && b_ir) b_ip <= b_ip + 1;
      b_iv <= (b_ip + (b_iv && b_ir) < 2*H*W);
      b_or <= 1'b1;
    end else begin
      a_iv <= 0; b_iv <= 0; a_or <= 0; b_or <= 0;
    end
  end

  function automatic void cmp(fmap r, int p, logic [CO*4-1:0] got, string tag);
    int y, x;
    y = (p % (r.h * r.w)) / r.w;
    x = p % r.w;
    for (int c = 0; c < CO; c++) begin
      checks++;
      if (int'(got[c*4 +: 4]) != r.get(c, y, x)) begin
        failures++;
        if (failures < 6) $display("%s pixel %0d ch %0d: got %0d want %0d", tag, p, c, got[c*4 +: 4], r.get(c, y, x));
      end
    end
  endfunction

  always_ff @(posedge clk) begin
    if (rst_n && a_ov && a_or) begin cmp(ref_a, a_op, a_out, "A"); a_op <= a_op + 1; end
    if (rst_n && b_ov && b_or) begin
      cmp(ref_b, b_op, b_out, "B");
      if (b_op == H*W) b_first <= cyc;        // first pixel of frame 2
      if (b_op == 2*H*W - 1) b_last <= cyc;
      b_op <= b_op + 1;
    end
  end

  initial begin
    cfg = '0;
    img = new(CI, H, W);
    foreach (img.d[i]) img.d[i] = int'(mix(32'(i) + 32'd99) % 16);
    ref_a = conv(img, 4, LA, CO, 3, 2);
    ref_b = conv(img, 4, LB, CO, 3, 1);
    repeat (3) @(posedge clk);
    // program thresholds: layer A broadcast, layer B channel by channel
    for (int i = 0; i < 15; i++) begin
      @(negedge clk);
      cfg = '{we: 1'b1, bcast: 1'b1, layer: 8'(LA), ch: '0, idx: 4'(i), data: 32'(threshold(LA, i))};
    end
    for (int c = 0; c < CO; c++)
      for (int i = 0; i < 15; i++) begin
        @(negedge clk);
        cfg = '{we: 1'b1, bcast: 1'b0, layer: 8'(LB), ch: 12'(c), idx: 4'(i), data: 32'(threshold(LB, i))};
      end
    @(negedge clk);
    cfg = '0;
    rst_n = 1;
    wait (a_op == 2 * ref_a.h * ref_a.w && b_op == 2 * H * W);
    repeat (20) @(posedge clk);
    // no extra outputs
    checks++;
    if (a_op != 2 * ref_a.h * ref_a.w || b_op != 2 * H * W) failures++;
    // rate: frame 2 of case B, H*W pixels at NF*SF = 2*18 cycles each
    checks++;
    if (b_last - b_first > longint'(real'((H*W - 1) * 36) * 1.1) + 3 * W + 20) begin
      failures++;
      $display("rate: %0d cycles for %0d pixels", b_last - b_first, H*W);
    end
    $display("case B frame: %0d cycles for %0d pixels (ideal %0d)", b_last - b_first, H*W, (H*W-1)*36);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired: A %0d B %0d pixels", a_op, b_op);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
