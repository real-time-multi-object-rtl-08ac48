// tb_fmap_src: plays feature map tb_ref_pkg::src_map[SLOT] as a whole-pixel
// stream (row-major, channel 0 in the low bits, B bits per channel), FRAMES
// times, starting when `go` is high. With STALL set, tvalid has random gaps.
module tb_fmap_src #(
  parameter int C      = 16,
  parameter int B      = 4,
  parameter int SLOT   = 0,
  parameter int FRAMES = 1,
  parameter bit STALL  = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         go,
  output logic [C*B-1:0] tdata,
  output logic         tvalid,
  input  logic         tready,
  output int           sent
);
  int npix;
  // data are looked up on the clock (the map is a class object, which a
  // combinational process would not be sensitive to)
  function automatic logic [C*B-1:0] pix(int n);
    tb_ref_pkg::fmap m;
    logic [C*B-1:0] v;
    m = tb_ref_pkg::src_map[SLOT];
    v = '0;
    for (int c = 0; c < C; c++)
      v[c*B +: B] = B'(m.get(c, (n % (m.h * m.w)) / m.w, n % m.w));
    return v;
  endfunction
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sent <= 0; tvalid <= 1'b0; npix <= 0; tdata <= '0;
    end else if (go) begin
      int nxt;
      nxt = sent + int'(tvalid && tready);
      npix  <= tb_ref_pkg::src_map[SLOT].h * tb_ref_pkg::src_map[SLOT].w;
      sent  <= nxt;
      tdata <= pix(nxt);
      if (!tvalid || tready)
        tvalid <= (npix != 0) && (nxt < FRAMES * npix) && (!STALL || $urandom_range(0, 3) != 0);
    end
  end
endmodule
