// maxpool: streaming 2-D max pooling, kernel K, stride S, padding PAD, over a
// whole-pixel stream of H x W pixels with C unsigned channels of B bits.
//
// Built from the same parts as a convolution: fm_padding, then
// conv_input_generator with SIMD = C (one beat per window position), then a
// reduction stage keeping a running channel-wise maximum over the K*K beats
// of a window and emitting it as one output pixel. Zero padding is exact
// because the inputs are unsigned, so a padded zero never wins over a real
// value it could hide.
//
// The paper names the block ("Maxpool 2d" inside SPPF, Fig. 3). K = 5,
// S = 1, PAD = 2 follow YOLOv8's SPPF; the structure is this design's choice.
module maxpool #(
  parameter int unsigned H   = 6,
  parameter int unsigned W   = 10,
  parameter int unsigned C   = 128,
  parameter int unsigned B   = 4,
  parameter int unsigned K   = 5,
  parameter int unsigned S   = 1,
  parameter int unsigned PAD = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [C*B-1:0]  in_tdata,
  input  logic            in_tvalid,
  output logic            in_tready,
  output logic [C*B-1:0]  out_tdata,
  output logic            out_tvalid,
  input  logic            out_tready
);
  logic [C*B-1:0] p_tdata, w_tdata, runmax;
  logic           p_tvalid, p_tready, w_tvalid, w_tready;
  logic [$clog2(K*K+1)-1:0] cnt;
  logic [C*B-1:0] nxt;

  fm_padding #(.H(H), .W(W), .C(C), .B(B), .PAD(PAD)) u_pad (
    .clk, .rst_n,
    .in_tdata, .in_tvalid, .in_tready,
    .out_tdata(p_tdata), .out_tvalid(p_tvalid), .out_tready(p_tready));

  conv_input_generator #(.IH(H+2*PAD), .IW(W+2*PAD), .C(C), .B(B), .K(K), .S(S), .SIMD(C)) u_swg (
    .clk, .rst_n,
    .in_tdata(p_tdata), .in_tvalid(p_tvalid), .in_tready(p_tready),
    .out_tdata(w_tdata), .out_tvalid(w_tvalid), .out_tready(w_tready));

  always_comb begin
    w_tready = !out_tvalid || out_tready;
    for (int c = 0; c < C; c++) begin
      logic [B-1:0] a, m;
      a = w_tdata[c*B +: B];
      m = runmax[c*B +: B];
      nxt[c*B +: B] = (cnt == 0 || a > m) ? a : m;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; runmax <= '0; out_tvalid <= 1'b0; out_tdata <= '0;
    end else begin
      if (out_tvalid && out_tready) out_tvalid <= 1'b0;
      if (w_tvalid && w_tready) begin
        if (cnt == K*K - 1) begin
          cnt        <= '0;
          out_tdata  <= nxt;
          out_tvalid <= 1'b1;
        end else begin
          cnt    <= cnt + 1'b1;
          runmax <= nxt;
        end
      end
    end
  end
endmodule
