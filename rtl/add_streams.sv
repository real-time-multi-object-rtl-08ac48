// add_streams: element-wise addition of two whole-pixel streams (FINN
// AddStreams), the residual join of the Bottleneck block.
//
// Both operands are unsigned activation codes quantised on the same scale
// (the paper constrains training so that they are), so the sum is a plain
// integer add; the output is one bit wider than the wider input, so 4-bit +
// 4-bit gives the 5-bit activations the paper mentions. A beat leaves when
// both inputs hold one; purely combinational.
module add_streams #(
  parameter int unsigned C  = 16,
  parameter int unsigned B0 = 4,
  parameter int unsigned B1 = 4,
  localparam int unsigned BO = ((B0 > B1) ? B0 : B1) + 1
) (
  input  logic [C*B0-1:0] in0_tdata,
  input  logic            in0_tvalid,
  output logic            in0_tready,
  input  logic [C*B1-1:0] in1_tdata,
  input  logic            in1_tvalid,
  output logic            in1_tready,
  output logic [C*BO-1:0] out_tdata,
  output logic            out_tvalid,
  input  logic            out_tready
);
  always_comb begin
    out_tvalid = in0_tvalid && in1_tvalid;
    in0_tready = out_tready && in1_tvalid;
    in1_tready = out_tready && in0_tvalid;
    for (int c = 0; c < C; c++)
      out_tdata[c*BO +: BO] = BO'(in0_tdata[c*B0 +: B0]) + BO'(in1_tdata[c*B1 +: B1]);
  end
endmodule
