// dup_streams: fork of one stream into two (FINN DuplicateStreams).
//
// Every input beat is offered to both outputs; the input beat is retired
// once both consumers have taken it, and a per-output flag remembers which
// one already did, so the two consumers may accept in different cycles.
// No storage beyond the two flags; no added latency.
module dup_streams #(
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [DW-1:0] in_tdata,
  input  logic          in_tvalid,
  output logic          in_tready,
  output logic [DW-1:0] out0_tdata,
  output logic          out0_tvalid,
  input  logic          out0_tready,
  output logic [DW-1:0] out1_tdata,
  output logic          out1_tvalid,
  input  logic          out1_tready
);
  logic done0, done1, ok0, ok1;

  always_comb begin
    out0_tdata  = in_tdata;
    out1_tdata  = in_tdata;
    out0_tvalid = in_tvalid && !done0;
    out1_tvalid = in_tvalid && !done1;
    ok0         = done0 || out0_tready;
    ok1         = done1 || out1_tready;
    in_tready   = ok0 && ok1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done0 <= 1'b0; done1 <= 1'b0;
    end else if (in_tvalid) begin
      if (ok0 && ok1) begin
        done0 <= 1'b0; done1 <= 1'b0;
      end else begin
        done0 <= ok0; done1 <= ok1;
      end
    end
  end
endmodule
