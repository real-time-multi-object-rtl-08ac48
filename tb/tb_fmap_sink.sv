// tb_fmap_sink: checks a stream against tb_ref_pkg::ref_map[SLOT].
// Whole-pixel mode (LANES = 0): one pixel of C channels x B bits per beat.
// Folded mode (LANES > 0): each beat holds LANES values of B bits (signed
// unless SIGNED = 0), channel-fold after channel-fold, C/LANES beats per
// pixel (the raw output of a detection head or an MVAU). Counts compared values and mismatches; with STALL
// set, tready has random gaps.
module tb_fmap_sink #(
  parameter int C     = 16,
  parameter int B     = 4,
  parameter int LANES = 0,
  parameter int SLOT  = 0,
  parameter bit STALL = 1'b1,
  parameter bit SIGNED = (LANES != 0),
  localparam int DW   = (LANES == 0) ? C * B : LANES * B
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [DW-1:0] tdata,
  input  logic          tvalid,
  output logic          tready,
  output int            beats,
  output int            checks,
  output int            failures
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      beats <= 0; checks <= 0; failures <= 0; tready <= 1'b0;
    end else begin
      tready <= !STALL || ($urandom_range(0, 3) != 0);
      if (tvalid && tready) begin
        tb_ref_pkg::fmap m;
        int pix, y, x, nch, c0, nc, nf, bad;
        m   = tb_ref_pkg::ref_map[SLOT];
        nf  = (LANES == 0) ? 1 : C / LANES;
        pix = (beats / nf) % (m.h * m.w);
        y   = pix / m.w;
        x   = pix % m.w;
        c0  = (LANES == 0) ? 0 : (beats % nf) * LANES;
        nc  = (LANES == 0) ? C : LANES;
        bad = 0;
        for (int c = 0; c < nc; c++) begin
          int got;
          got = SIGNED ? int'($signed(tdata[c*B +: B])) : int'(tdata[c*B +: B]);
          if (got != m.get(c0 + c, y, x)) begin
            bad++;
            if (failures + bad < 4)
              $display("sink %0d: pixel (%0d,%0d) ch %0d got %0d want %0d", SLOT, y, x, c0 + c, got, m.get(c0 + c, y, x));
          end
        end
        checks   <= checks + nc;
        failures <= failures + bad;
        beats    <= beats + 1;
      end
    end
  end
endmodule
