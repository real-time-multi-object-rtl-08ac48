// tb_dma_s2mm: self-checking test of the stream-to-memory DMA.
// How it works: a source with random gaps streams `beats` hash-valued
// 128-bit words into the DMA, which writes them through AXI4 to a memory
// model with random awready/wready delays. After `done` every word of the
// buffer must hold the word streamed for it, no word outside the buffer may
// be written, `done` must pulse once, and the memory model must see no rule
// violation (burst length, 4 KiB crossing, strobes, wlast position). Two
// runs (37 words across a 4 KiB boundary, then 5 words) check restart.
// Interface/timing: watchdog of 100000 cycles; no rate is specified for
// the DMA, so none is checked here.
module tb_dma_s2mm;
  localparam int AW = 40, DW = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, err;
  logic [AW-1:0] base;
  logic [31:0] beats;
  logic [AW-1:0] awaddr; logic [7:0] awlen; logic [2:0] awsize; logic [1:0] awburst; logic awvalid, awready;
  logic [DW-1:0] wdata; logic [DW/8-1:0] wstrb; logic wlast, wvalid, wready;
  logic [1:0] bresp; logic bvalid, bready;
  logic [DW-1:0] i_d; logic i_v, i_r;
  int nbur, nerr, sent, dn;
  longint words;

  dma_s2mm #(.DW(DW), .AW(AW)) dut (.clk, .rst_n, .start, .base_addr(base), .beats, .busy, .done, .err,
    .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst), .m_awvalid(awvalid), .m_awready(awready),
    .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_wvalid(wvalid), .m_wready(wready),
    .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready),
    .in_tdata(i_d), .in_tvalid(i_v), .in_tready(i_r));
  tb_axi_wr_mem #(.DW(DW), .AW(AW)) mem (.clk, .rst_n, .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
    .wdata, .wstrb, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready, .bursts(nbur), .rule_errs(nerr), .words(words));

  function automatic logic [DW-1:0] word(int run, int n);
    logic [DW-1:0] v;
    for (int i = 0; i < DW / 32; i++) v[i*32 +: 32] = tb_ref_pkg::mix(32'(run * 100000 + n * 4 + i));
    return v;
  endfunction

  int run_no;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      i_v <= 0; sent <= 0; i_d <= '0;
    end else begin
      int nx;
      nx = sent + int'(i_v && i_r);
      sent <= nx;
      i_d  <= word(run_no, nx);
      if (!i_v || i_r) i_v <= (nx < int'(beats)) && ($urandom_range(0, 3) != 0);
      if (done) dn <= dn + 1;
    end
  end

  task automatic run(int r, logic [AW-1:0] b, int n);
    longint w0;
    w0 = words;
    @(negedge clk);
    run_no = r; base = b; beats = 32'(n); dn = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    wait (dn == 1);
    repeat (20) @(negedge clk);
    for (int i = 0; i < n; i++) begin
      longint k;
      k = longint'(b / 16) + i;
      checks++;
      if (!mem.mem.exists(k) || mem.mem[k] != word(r, i)) begin
        failures++;
        if (failures < 5) $display("run %0d word %0d wrong", r, i);
      end
    end
    checks += 3;
    if (words - w0 != n) failures++;
    if (dn != 1) failures++;
    if (busy) failures++;
    $display("run %0d: %0d words written", r, words - w0);
  endtask

  initial begin
    start = 0; base = '0; beats = 0; run_no = 0; dn = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 40'h1000 - 40'd80, 37);
    // reset the source count between runs
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    run(2, 40'h30_0000, 5);
    checks += 2;
    if (nerr != 0) begin failures++; $display("AXI rule violations %0d", nerr); end
    if (err) failures++;
    $display("bursts %0d", nbur);
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
