// dma_mm2s: memory-to-stream DMA with an AXI4 read master (the "Input DMA"
// and "Weights DMA" blocks of the programmable logic).
//
// After a `start` pulse it reads `beats` words of DW bits from `base_addr`
// onwards and emits them, in order, on the output stream; it then reads the
// same buffer again, `repeats` times in all, and pulses `done`. The input
// DMA uses repeats = 1. A weights DMA uses repeats = number of output pixels
// of its layer: the MVAU keeps no weights, so the whole filter matrix is
// sent again for every window position, as the paper describes.
//
// AXI side: INCR bursts of at most MAX_BURST beats that never cross a 4 KiB
// boundary, one burst outstanding at a time; rready follows the stream's
// tready, so a stalled consumer stalls the bus. `base_addr` must be aligned
// to DW/8 bytes. A non-OKAY read response sets the sticky `err` flag.
// Register interface (AXI-Lite in a real system) is reduced to plain ports.
//
// The paper gives the function (one DMA per MVAU, weights in processor
// memory, sent for every filter position); burst policy and control ports
// are this design's choices.
module dma_mm2s #(
  parameter int unsigned DW        = 128,
  parameter int unsigned AW        = finn_pkg::AXI_ADDR_W,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // control
  input  logic          start,
  input  logic [AW-1:0] base_addr,
  input  logic [31:0]   beats,
  input  logic [31:0]   repeats,
  output logic          busy,
  output logic          done,
  output logic          err,
  // AXI4 read address channel
  output logic [AW-1:0] m_araddr,
  output logic [7:0]    m_arlen,
  output logic [2:0]    m_arsize,
  output logic [1:0]    m_arburst,
  output logic          m_arvalid,
  input  logic          m_arready,
  // AXI4 read data channel
  input  logic [DW-1:0] m_rdata,
  input  logic [1:0]    m_rresp,
  input  logic          m_rlast,
  input  logic          m_rvalid,
  output logic          m_rready,
  // stream out
  output logic [DW-1:0] out_tdata,
  output logic          out_tvalid,
  input  logic          out_tready
);
  localparam int unsigned BB = DW / 8;          // bytes per beat
  localparam int unsigned SZ = $clog2(BB);

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA} state_t;
  state_t state;

  logic [AW-1:0] base, addr;
  logic [31:0]   nbeats, remaining, reps_left;
  logic [31:0]   to_4k, blen;

  always_comb begin
    to_4k = (32'(4096) - 32'(addr[11:0])) / BB;
    blen  = remaining;
    if (blen > MAX_BURST) blen = MAX_BURST;
    if (blen > to_4k)     blen = to_4k;
  end

  assign busy       = (state != S_IDLE);
  assign m_arvalid  = (state == S_ADDR);
  assign m_araddr   = addr;
  assign m_arlen    = 8'(blen - 1);
  assign m_arsize   = 3'(SZ);
  assign m_arburst  = 2'b01;
  assign out_tdata  = m_rdata;
  assign out_tvalid = (state == S_DATA) && m_rvalid;
  assign m_rready   = (state == S_DATA) && out_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; base <= '0; addr <= '0; nbeats <= '0;
      remaining <= '0; reps_left <= '0; done <= 1'b0; err <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start && beats != 0 && repeats != 0) begin
          base      <= base_addr;
          addr      <= base_addr;
          nbeats    <= beats;
          remaining <= beats;
          reps_left <= repeats;
          err       <= 1'b0;
          state     <= S_ADDR;
        end
        S_ADDR: if (m_arready) begin
          remaining <= remaining - blen;
          addr      <= addr + AW'(blen * BB);
          state     <= S_DATA;
        end
        S_DATA: if (m_rvalid && m_rready) begin
          if (m_rresp != 2'b00) err <= 1'b1;
          if (m_rlast) begin
            if (remaining != 0) state <= S_ADDR;
            else if (reps_left > 1) begin
              reps_left <= reps_left - 1;
              remaining <= nbeats;
              addr      <= base;
              state     <= S_ADDR;
            end else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI rule: a read address, once offered, stays stable until accepted.
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr) && $stable(m_arlen));
endmodule
