// tb_wsrc: weight-stream source for testbenches. Plays the part of a weight
// DMA: sends the filter matrix of reference layer LAYER (geometry taken from
// tb_ref_pkg) over and over, one 128-bit beat per handshake, with random
// gaps in tvalid when GAPS is set. Counts the beats it has sent.
module tb_wsrc #(
  parameter int LAYER = 0,
  parameter bit GAPS  = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic [127:0] w_tdata,
  output logic         w_tvalid,
  input  logic         w_tready,
  output longint       sent
);
  int beat;
  // the word is looked up on the clock: the geometry lives in package
  // variables, which a combinational process would not be sensitive to
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      beat <= 0; w_tvalid <= 1'b0; sent <= 0;
      w_tdata <= tb_ref_pkg::weight_word(LAYER, 0);
    end else begin
      int nxt;
      nxt = beat;
      if (w_tvalid && w_tready) begin
        sent <= sent + 1;
        nxt  = (beat + 1 == tb_ref_pkg::weight_beats(LAYER)) ? 0 : beat + 1;
      end
      beat    <= nxt;
      w_tdata <= tb_ref_pkg::weight_word(LAYER, nxt);
      if (!w_tvalid || w_tready)
        w_tvalid <= !GAPS || ($urandom_range(0, 7) != 0);
    end
  end
endmodule
