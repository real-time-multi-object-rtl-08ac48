// tb_dma_mm2s: self-checking test of the memory-to-stream DMA.
// How it works: two DMAs (128-bit and 32-bit words) read from AXI memory
// models whose data is a hash of the address. Each run reads `beats` words
// from a base chosen so the buffer crosses a 4 KiB boundary, `repeats`
// times; the output stream (with random back-pressure) must carry exactly
// beats*repeats words in address order, `done` must pulse once at the end
// and `busy` must be high in between. The memory model flags any burst
// longer than 16 beats, crossing 4 KiB, or not INCR/full width. Two runs
// per DMA, with different sizes, check that a new start works.
// Interface/timing: watchdog of 100000 cycles. No rate is specified for the
// DMA, so none is checked here (the system rate is checked end to end).
module tb_dma_mm2s;
  localparam int AW = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start;
  logic [AW-1:0] base;
  logic [31:0] beats, reps;
  // 128-bit DMA
  logic busy_a, done_a, err_a;
  logic [AW-1:0] ar_a; logic [7:0] len_a; logic [2:0] sz_a; logic [1:0] bu_a; logic arv_a, arr_a;
  logic [127:0] rd_a; logic [1:0] rr_a; logic rl_a, rv_a, rrd_a;
  logic [127:0] o_a; logic ov_a, or_a;
  int nb_a, ne_a;
  // 32-bit DMA
  logic busy_b, done_b, err_b;
  logic [AW-1:0] ar_b; logic [7:0] len_b; logic [2:0] sz_b; logic [1:0] bu_b; logic arv_b, arr_b;
  logic [31:0] rd_b; logic [1:0] rr_b; logic rl_b, rv_b, rrd_b;
  logic [31:0] o_b; logic ov_b, or_b;
  int nb_b, ne_b;

  dma_mm2s #(.DW(128), .AW(AW)) dut_a (.clk, .rst_n, .start, .base_addr(base), .beats, .repeats(reps),
    .busy(busy_a), .done(done_a), .err(err_a),
    .m_araddr(ar_a), .m_arlen(len_a), .m_arsize(sz_a), .m_arburst(bu_a), .m_arvalid(arv_a), .m_arready(arr_a),
    .m_rdata(rd_a), .m_rresp(rr_a), .m_rlast(rl_a), .m_rvalid(rv_a), .m_rready(rrd_a),
    .out_tdata(o_a), .out_tvalid(ov_a), .out_tready(or_a));
  tb_axi_rd_mem #(.DW(128), .AW(AW), .KIND(0)) mem_a (.clk, .rst_n, .base,
    .araddr(ar_a), .arlen(len_a), .arsize(sz_a), .arburst(bu_a), .arvalid(arv_a), .arready(arr_a),
    .rdata(rd_a), .rresp(rr_a), .rlast(rl_a), .rvalid(rv_a), .rready(rrd_a), .bursts(nb_a), .rule_errs(ne_a));
  dma_mm2s #(.DW(32), .AW(AW)) dut_b (.clk, .rst_n, .start, .base_addr(base), .beats, .repeats(reps),
    .busy(busy_b), .done(done_b), .err(err_b),
    .m_araddr(ar_b), .m_arlen(len_b), .m_arsize(sz_b), .m_arburst(bu_b), .m_arvalid(arv_b), .m_arready(arr_b),
    .m_rdata(rd_b), .m_rresp(rr_b), .m_rlast(rl_b), .m_rvalid(rv_b), .m_rready(rrd_b),
    .out_tdata(o_b), .out_tvalid(ov_b), .out_tready(or_b));
  tb_axi_rd_mem #(.DW(32), .AW(AW), .KIND(0)) mem_b (.clk, .rst_n, .base,
    .araddr(ar_b), .arlen(len_b), .arsize(sz_b), .arburst(bu_b), .arvalid(arv_b), .arready(arr_b),
    .rdata(rd_b), .rresp(rr_b), .rlast(rl_b), .rvalid(rv_b), .rready(rrd_b), .bursts(nb_b), .rule_errs(ne_b));

  function automatic logic [127:0] expect_word(int dw, int n);
    logic [127:0] v;
    logic [AW-1:0] a;
    v = '0;
    a = base + AW'((n % int'(beats)) * (dw / 8));
    for (int i = 0; i < dw / 32; i++) v[i*32 +: 32] = tb_ref_pkg::mix(32'(a / (dw / 8)) * 32'd13 + 32'(i));
    return v;
  endfunction

  int got_a, got_b, dn_a, dn_b, bad_busy;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      or_a <= 0; or_b <= 0;
    end else begin
      or_a <= $urandom_range(0, 3) != 0;
      or_b <= $urandom_range(0, 3) != 0;
      if (ov_a && or_a) begin
        checks++;
        if (o_a != expect_word(128, got_a)) begin
          failures++;
          if (failures < 5) $display("A word %0d: got %h want %h", got_a, o_a, expect_word(128, got_a));
        end
        got_a++;
      end
      if (ov_b && or_b) begin
        checks++;
        if (o_b != expect_word(32, got_b)[31:0]) begin
          failures++;
          if (failures < 5) $display("B word %0d: got %h want %h", got_b, o_b, expect_word(32, got_b));
        end
        got_b++;
      end
      if (done_a) dn_a++;
      if (done_b) dn_b++;
      if ((got_a < int'(beats * reps) && dn_a == 0 && !busy_a && got_a > 0)) bad_busy++;
    end
  end

  task automatic run(logic [AW-1:0] b, int n, int r);
    got_a = 0; got_b = 0; dn_a = 0; dn_b = 0;
    @(negedge clk);
    base = b; beats = 32'(n); reps = 32'(r); start = 1;
    @(negedge clk);
    start = 0;
    wait (dn_a == 1 && dn_b == 1);
    repeat (20) @(negedge clk);
    checks += 4;
    if (got_a != n * r) failures++;
    if (got_b != n * r) failures++;
    if (dn_a != 1 || dn_b != 1) failures++;
    if (busy_a || busy_b) failures++;
    $display("run base %h beats %0d repeats %0d: %0d / %0d words", b, n, r, got_a, got_b);
  endtask

  initial begin
    start = 0; base = '0; beats = 0; reps = 0; bad_busy = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(40'h1000 - 40'd80, 37, 3);
    run(40'h20_0000, 5, 2);
    checks += 4;
    if (ne_a != 0 || ne_b != 0) begin failures++; $display("AXI rule violations %0d %0d", ne_a, ne_b); end
    if (err_a || err_b) failures++;
    if (bad_busy != 0) failures++;
    if (nb_a < 10) failures++;
    $display("bursts: %0d (128-bit), %0d (32-bit)", nb_a, nb_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
