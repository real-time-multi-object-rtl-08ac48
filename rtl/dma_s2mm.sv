// dma_s2mm: stream-to-memory DMA with an AXI4 write master (the "Output
// DMA" blocks; one per detection head).
//
// After a `start` pulse it writes the next `beats` stream words to memory
// from `base_addr` onwards and pulses `done` when the last write response
// has arrived. AXI side: INCR bursts of at most MAX_BURST beats that never
// cross a 4 KiB boundary, address first, then the data beats (wvalid follows
// the stream's tvalid), then the response, one burst at a time. All byte
// strobes are set. `base_addr` must be aligned to DW/8 bytes. A non-OKAY
// write response sets the sticky `err` flag.
//
// The paper gives only the function; the burst policy and the control ports
// are this design's choices.
module dma_s2mm #(
  parameter int unsigned DW        = 128,
  parameter int unsigned AW        = finn_pkg::AXI_ADDR_W,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  // control
  input  logic            start,
  input  logic [AW-1:0]   base_addr,
  input  logic [31:0]     beats,
  output logic            busy,
  output logic            done,
  output logic            err,
  // AXI4 write address channel
  output logic [AW-1:0]   m_awaddr,
  output logic [7:0]      m_awlen,
  output logic [2:0]      m_awsize,
  output logic [1:0]      m_awburst,
  output logic            m_awvalid,
  input  logic            m_awready,
  // AXI4 write data channel
  output logic [DW-1:0]   m_wdata,
  output logic [DW/8-1:0] m_wstrb,
  output logic            m_wlast,
  output logic            m_wvalid,
  input  logic            m_wready,
  // AXI4 write response channel
  input  logic [1:0]      m_bresp,
  input  logic            m_bvalid,
  output logic            m_bready,
  // stream in
  input  logic [DW-1:0]   in_tdata,
  input  logic            in_tvalid,
  output logic            in_tready
);
  localparam int unsigned BB = DW / 8;
  localparam int unsigned SZ = $clog2(BB);

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA, S_RESP} state_t;
  state_t state;

  logic [AW-1:0] addr;
  logic [31:0]   remaining, to_4k, blen;
  logic [7:0]    len, wcnt;

  always_comb begin
    to_4k = (32'(4096) - 32'(addr[11:0])) / BB;
    blen  = remaining;
    if (blen > MAX_BURST) blen = MAX_BURST;
    if (blen > to_4k)     blen = to_4k;
  end

  assign busy      = (state != S_IDLE);
  assign m_awvalid = (state == S_ADDR);
  assign m_awaddr  = addr;
  assign m_awlen   = 8'(blen - 1);
  assign m_awsize  = 3'(SZ);
  assign m_awburst = 2'b01;
  assign m_wdata   = in_tdata;
  assign m_wstrb   = '1;
  assign m_wlast   = (wcnt == len);
  assign m_wvalid  = (state == S_DATA) && in_tvalid;
  assign in_tready = (state == S_DATA) && m_wready;
  assign m_bready  = (state == S_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; addr <= '0; remaining <= '0; len <= '0; wcnt <= '0;
      done <= 1'b0; err <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start && beats != 0) begin
          addr      <= base_addr;
          remaining <= beats;
          err       <= 1'b0;
          state     <= S_ADDR;
        end
        S_ADDR: if (m_awready) begin
          len       <= m_awlen;
          wcnt      <= '0;
          remaining <= remaining - blen;
          addr      <= addr + AW'(blen * BB);
          state     <= S_DATA;
        end
        S_DATA: if (m_wvalid && m_wready) begin
          wcnt <= wcnt + 1'b1;
          if (m_wlast) state <= S_RESP;
        end
        S_RESP: if (m_bvalid) begin
          if (m_bresp != 2'b00) err <= 1'b1;
          if (remaining != 0) state <= S_ADDR;
          else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI rules: address and write data stay stable until accepted.
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr) && $stable(m_awlen));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata) && $stable(m_wlast));
endmodule
