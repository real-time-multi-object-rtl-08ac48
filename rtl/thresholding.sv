// thresholding: requantisation by multi-thresholding (FINN Thresholding_Batch).
//
// Each incoming accumulator value x of channel c is compared with that
// channel's NT = 2^OBITS - 1 thresholds; the output code is the number of
// thresholds t with x >= t. For ascending thresholds this is the index of
// the smallest threshold larger than x, which is how the MultiThreshold
// operator is defined. Batch normalisation, ReLU and the scale of the next
// quantiser are all folded into the threshold values offline
// (t <- (t - b) / a), so no multiplier is needed here.
//
// Interface: PE accumulators per beat (lane 0 = channel nf*PE), channels
// cycling 0..C-1 in folds of PE; PE codes of OBITS bits per output beat.
// One registered stage, full throughput.
//
// Thresholds live in a C x NT register array and are written at run time
// through the shared configuration bus (finn_pkg::thr_cfg_t); a stage reacts
// only to writes carrying its LAYER_ID. The paper does not say how the
// thresholds are loaded; the bus, and the broadcast write that sets one
// threshold for all channels, are choices of this design.
module thresholding #(
  parameter int unsigned C        = 16,
  parameter int unsigned PE       = 8,
  parameter int unsigned IBITS    = finn_pkg::ACC_BITS,
  parameter int unsigned OBITS    = finn_pkg::ABITS,
  parameter int unsigned LAYER_ID = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  finn_pkg::thr_cfg_t    cfg,
  input  logic [PE*IBITS-1:0]   in_tdata,
  input  logic                  in_tvalid,
  output logic                  in_tready,
  output logic [PE*OBITS-1:0]   out_tdata,
  output logic                  out_tvalid,
  input  logic                  out_tready
);
  localparam int unsigned NT = (1 << OBITS) - 1;
  localparam int unsigned NF = C / PE;

  logic signed [IBITS-1:0] thr [C][NT];
  logic [$clog2(NF+1)-1:0] nf;
  logic [PE*OBITS-1:0]     codes;

  always_comb begin
    in_tready = !out_tvalid || out_tready;
    for (int p = 0; p < PE; p++) begin
      logic [OBITS-1:0] cnt;
      logic signed [IBITS-1:0] x;
      x   = $signed(in_tdata[p*IBITS +: IBITS]);
      cnt = '0;
      for (int t = 0; t < NT; t++)
        if (x >= thr[nf*PE + p][t]) cnt = cnt + 1'b1;
      codes[p*OBITS +: OBITS] = cnt;
    end
  end

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.layer == 8'(LAYER_ID) && 32'(cfg.idx) < NT) begin
      for (int c = 0; c < C; c++)
        if (cfg.bcast || cfg.ch == 12'(c)) thr[c][cfg.idx] <= IBITS'(cfg.data);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nf         <= '0;
      out_tvalid <= 1'b0;
      out_tdata  <= '0;
    end else begin
      if (out_tvalid && out_tready) out_tvalid <= 1'b0;
      if (in_tvalid && in_tready) begin
        out_tdata  <= codes;
        out_tvalid <= 1'b1;
        nf         <= (nf == NF - 1) ? '0 : nf + 1'b1;
      end
    end
  end
endmodule
