// fm_padding: zero padding of a streamed feature map (FINN FMPadding_Batch).
//
// A pixel stream of H rows x W columns (row-major, one whole pixel of C
// channels x B bits per beat) comes in; an (H+2*PAD) x (W+2*PAD) stream goes
// out. Border beats are produced as zero without consuming input, interior
// beats pass the input through. Output counters walk the padded map; the
// module has no storage and adds no latency (valid/ready pass straight
// through on interior beats).
//
// From the paper: the block and its role ahead of the window generator
// (Fig. 6c, 1x320x320x3 -> 1x322x322x3 for a 3x3 kernel). Symmetric padding
// and a pad value of zero are choices of this design; zero is the real zero
// of the unsigned activation codes.
module fm_padding #(
  parameter int unsigned H   = 192,
  parameter int unsigned W   = 320,
  parameter int unsigned C   = 3,
  parameter int unsigned B   = 8,
  parameter int unsigned PAD = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [C*B-1:0]   in_tdata,
  input  logic             in_tvalid,
  output logic             in_tready,
  output logic [C*B-1:0]   out_tdata,
  output logic             out_tvalid,
  input  logic             out_tready
);
  localparam int unsigned OH = H + 2 * PAD;
  localparam int unsigned OW = W + 2 * PAD;

  logic [$clog2(OH+1)-1:0] oy;
  logic [$clog2(OW+1)-1:0] ox;
  logic interior;

  always_comb begin
    interior   = (oy >= PAD) && (oy < PAD + H) && (ox >= PAD) && (ox < PAD + W);
    out_tvalid = interior ? in_tvalid : 1'b1;
    out_tdata  = interior ? in_tdata : '0;
    in_tready  = interior && out_tready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oy <= '0;
      ox <= '0;
    end else if (out_tvalid && out_tready) begin
      if (ox == OW - 1) begin
        ox <= '0;
        oy <= (oy == OH - 1) ? '0 : oy + 1'b1;
      end else begin
        ox <= ox + 1'b1;
      end
    end
  end
endmodule
