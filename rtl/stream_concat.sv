// stream_concat: channel concatenation of two whole-pixel streams whose
// elements may have different bit widths (FINN StreamingConcat, extended).
//
// The output has C0+C1 channels of BO = max(B0, B1) bits: the C0 channels of
// in0 first (least significant), then the C1 channels of in1. Narrower
// elements are zero-extended, which is exact because all activations are
// unsigned codes on a shared scale. In C2f this joins 4-bit Split outputs
// with 5-bit (and wider) Bottleneck outputs. A beat leaves when both inputs
// hold one; purely combinational.
module stream_concat #(
  parameter int unsigned C0 = 16,
  parameter int unsigned B0 = 4,
  parameter int unsigned C1 = 16,
  parameter int unsigned B1 = 5,
  localparam int unsigned BO = (B0 > B1) ? B0 : B1
) (
  input  logic [C0*B0-1:0]      in0_tdata,
  input  logic                  in0_tvalid,
  output logic                  in0_tready,
  input  logic [C1*B1-1:0]      in1_tdata,
  input  logic                  in1_tvalid,
  output logic                  in1_tready,
  output logic [(C0+C1)*BO-1:0] out_tdata,
  output logic                  out_tvalid,
  input  logic                  out_tready
);
  always_comb begin
    out_tvalid = in0_tvalid && in1_tvalid;
    in0_tready = out_tready && in1_tvalid;
    in1_tready = out_tready && in0_tvalid;
    for (int c = 0; c < C0; c++)
      out_tdata[c*BO +: BO] = BO'(in0_tdata[c*B0 +: B0]);
    for (int c = 0; c < C1; c++)
      out_tdata[(C0+c)*BO +: BO] = BO'(in1_tdata[c*B1 +: B1]);
  end
endmodule
