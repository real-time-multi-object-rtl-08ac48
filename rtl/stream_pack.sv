// stream_pack: data-width converter that gathers NF narrow beats of E
// elements into one wide beat of NF*E elements (the first beat lands in the
// least significant bits). Used after thresholding to turn PE-wide folds
// back into whole-pixel beats. Full throughput: the wide beat is registered
// and the next narrow beat is accepted in the cycle the wide one leaves.
module stream_pack #(
  parameter int unsigned NF = 2,
  parameter int unsigned EW = 32   // bits per narrow beat
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [EW-1:0]    in_tdata,
  input  logic             in_tvalid,
  output logic             in_tready,
  output logic [NF*EW-1:0] out_tdata,
  output logic             out_tvalid,
  input  logic             out_tready
);
  logic [NF*EW-1:0]        part;
  logic [$clog2(NF+1)-1:0] cnt;

  assign in_tready = !out_tvalid || out_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      part <= '0; cnt <= '0; out_tvalid <= 1'b0; out_tdata <= '0;
    end else begin
      if (out_tvalid && out_tready) out_tvalid <= 1'b0;
      if (in_tvalid && in_tready) begin
        if (cnt == NF - 1) begin
          out_tdata  <= (NF*EW)'(in_tdata) << ((NF - 1) * EW) | part;
          out_tvalid <= 1'b1;
          part       <= '0;
          cnt        <= '0;
        end else begin
          part <= part | ((NF*EW)'(in_tdata) << (cnt * EW));
          cnt  <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
