// stream_fifo: first-in first-out queue between two streaming stages
// (FINN StreamingFIFO).
//
// The pipeline needs such queues in two places: behind a producer that
// emits in bursts (so the consumer is not stalled) and on the shorter of two
// parallel branches that meet again at a join (Concat, Add), where the queue
// must hold everything the longer branch swallows before its first output,
// or the pipeline deadlocks. The paper sizes these queues by simulation; here
// DEPTH is a parameter and `count`/`max_count` report the fill level so a
// simulation can measure it.
//
// Circular buffer of DEPTH words, any DEPTH >= 1, read data taken straight
// from the array (first-word fall-through), one write and one read per cycle.
module stream_fifo #(
  parameter int unsigned DW    = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [DW-1:0]             in_tdata,
  input  logic                      in_tvalid,
  output logic                      in_tready,
  output logic [DW-1:0]             out_tdata,
  output logic                      out_tvalid,
  input  logic                      out_tready,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic [$clog2(DEPTH+1)-1:0] max_count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          push, pop;

  always_comb begin
    in_tready  = (count != DEPTH);
    out_tvalid = (count != 0);
    out_tdata  = mem[rp];
    push       = in_tvalid && in_tready;
    pop        = out_tvalid && out_tready;
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_tdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0; max_count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      if (push && !pop) count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
      if (count > max_count) max_count <= count;
    end
  end
endmodule
