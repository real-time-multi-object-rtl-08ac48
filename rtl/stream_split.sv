// stream_split: channel split of a whole-pixel stream (the Split operation
// added to FINN for the C2f block).
//
// Channels 0..C0-1 of every beat go to out0, channels C0..C0+C1-1 to out1.
// The two consumers are served independently, as in dup_streams: a
// per-output flag records which one has already taken the current beat.
module stream_split #(
  parameter int unsigned C0 = 16,
  parameter int unsigned C1 = 16,
  parameter int unsigned B  = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [(C0+C1)*B-1:0] in_tdata,
  input  logic                in_tvalid,
  output logic                in_tready,
  output logic [C0*B-1:0]     out0_tdata,
  output logic                out0_tvalid,
  input  logic                out0_tready,
  output logic [C1*B-1:0]     out1_tdata,
  output logic                out1_tvalid,
  input  logic                out1_tready
);
  logic done0, done1, ok0, ok1;

  always_comb begin
    out0_tdata  = in_tdata[C0*B-1:0];
    out1_tdata  = in_tdata[(C0+C1)*B-1:C0*B];
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
