// mvau: folded matrix-vector unit (FINN MatrixVectorActivation, no activation).
//
// Computes y = W * x for every column x (length MW) of the image matrix, with
// the MH x MW filter matrix W streamed in from a weight DMA. PE rows of W are
// processed in parallel and SIMD columns per cycle, so one column takes
// NF * SF cycles (NF = MH/PE neuron folds, SF = MW/SIMD synapse folds).
//
// Weights are not stored on chip: the weight stream carries the whole filter
// matrix again for every window position, one beat of PE*SIMD weights per
// cycle, ordered neuron fold major, then synapse fold. Inside a beat weight
// (p, s) sits at bits [(p*SIMD+s)*WBITS +: WBITS]. The input column is taken
// from the activation stream during the first neuron fold and replayed from a
// small buffer (SF entries) for the others.
//
// Timing: one MAC step per cycle when a weight beat, an input beat (first
// fold only) and a free output register are all present. After the last
// synapse fold of a neuron fold the PE accumulators appear in the output
// register (PE lanes of ACC_BITS, signed, lane 0 = output channel nf*PE).
//
// From the paper: PE/SIMD folding (rows of the filter matrix over PEs,
// columns over SIMD lanes), channel interleaving (Fig. 7) and weights sent by
// DMA for every filter position (Sec. 4.2). Signed weights, unsigned
// activations, the beat layout and the accumulator width are choices of this
// design.
module mvau #(
  parameter int unsigned MW       = 27,
  parameter int unsigned MH       = 16,
  parameter int unsigned SIMD     = 3,
  parameter int unsigned PE       = 8,
  parameter int unsigned IBITS    = 8,
  parameter int unsigned WBITS    = finn_pkg::WBITS,
  parameter int unsigned ACC_BITS = finn_pkg::ACC_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [SIMD*IBITS-1:0]    in_tdata,
  input  logic                     in_tvalid,
  output logic                     in_tready,
  input  logic [PE*SIMD*WBITS-1:0] w_tdata,
  input  logic                     w_tvalid,
  output logic                     w_tready,
  output logic [PE*ACC_BITS-1:0]   out_tdata,
  output logic                     out_tvalid,
  input  logic                     out_tready
);
  localparam int unsigned SF = MW / SIMD;
  localparam int unsigned NF = MH / PE;

  initial begin
    assert (MW % SIMD == 0) else $error("MW must be a multiple of SIMD");
    assert (MH % PE == 0)   else $error("MH must be a multiple of PE");
  end

  logic [SIMD*IBITS-1:0]           ibuf [SF];
  logic signed [ACC_BITS-1:0]      acc  [PE];
  logic [$clog2(SF+1)-1:0]         sf;
  logic [$clog2(NF+1)-1:0]         nf;

  logic                            out_free, fire, first_fold;
  logic [SIMD*IBITS-1:0]           act;
  logic signed [ACC_BITS-1:0]      acc_next [PE];

  always_comb begin
    first_fold = (nf == 0);
    out_free   = !out_tvalid || out_tready;
    fire       = w_tvalid && out_free && (!first_fold || in_tvalid);
    in_tready  = first_fold && w_tvalid && out_free;
    w_tready   = out_free && (!first_fold || in_tvalid);
    act        = first_fold ? in_tdata : ibuf[sf];
    for (int p = 0; p < PE; p++) begin
      logic signed [ACC_BITS-1:0] sum;
      sum = '0;
      for (int s = 0; s < SIMD; s++) begin
        logic signed [WBITS-1:0]  w;
        logic signed [IBITS:0]    a;
        w   = w_tdata[(p*SIMD+s)*WBITS +: WBITS];
        a   = $signed({1'b0, act[s*IBITS +: IBITS]});
        sum = sum + ACC_BITS'(w * a);
      end
      acc_next[p] = ((sf == 0) ? '0 : acc[p]) + sum;
    end
  end

  always_ff @(posedge clk) begin
    if (fire && first_fold) ibuf[sf] <= in_tdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sf         <= '0;
      nf         <= '0;
      out_tvalid <= 1'b0;
      out_tdata  <= '0;
      for (int p = 0; p < PE; p++) acc[p] <= '0;
    end else begin
      if (out_tvalid && out_tready) out_tvalid <= 1'b0;
      if (fire) begin
        if (sf == SF - 1) begin
          sf <= '0;
          nf <= (nf == NF - 1) ? '0 : nf + 1'b1;
          for (int p = 0; p < PE; p++) out_tdata[p*ACC_BITS +: ACC_BITS] <= acc_next[p];
          out_tvalid <= 1'b1;
        end else begin
          sf <= sf + 1'b1;
          for (int p = 0; p < PE; p++) acc[p] <= acc_next[p];
        end
      end
    end
  end
endmodule
