// tb_axi_wr_mem: AXI4 write-slave memory model for the testbenches.
// How it works: accepts one write burst at a time (awready and wready with
// random delays), stores every beat in a sparse word memory keyed by the
// word address, and answers each burst with one OKAY write response after
// its last beat. It checks the AXI rules the DMA promises: INCR bursts,
// full-width beats, at most 16 beats, no 4 KiB crossing, all byte strobes
// set, and wlast exactly on beat arlen+1. The test bench reads the stored
// words through `mem`; `bursts` and `rule_errs` count bursts and violations.
module tb_axi_wr_mem #(
  parameter int DW    = 128,
  parameter int AW    = 40,
  parameter bit STALL = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [AW-1:0]   awaddr,
  input  logic [7:0]      awlen,
  input  logic [2:0]      awsize,
  input  logic [1:0]      awburst,
  input  logic            awvalid,
  output logic            awready,
  input  logic [DW-1:0]   wdata,
  input  logic [DW/8-1:0] wstrb,
  input  logic            wlast,
  input  logic            wvalid,
  output logic            wready,
  output logic [1:0]      bresp,
  output logic            bvalid,
  input  logic            bready,
  output int              bursts,
  output int              rule_errs,
  output longint          words
);
  localparam int NB = DW / 8;
  logic [DW-1:0] mem [longint];
  logic [AW-1:0] addr;
  int left;
  logic inb;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      awready <= 1'b0; wready <= 1'b0; bvalid <= 1'b0; bresp <= '0;
      left <= 0; inb <= 1'b0; bursts <= 0; rule_errs <= 0; words <= 0; addr <= '0;
    end else begin
      if (bvalid && bready) bvalid <= 1'b0;
      if (!inb && !bvalid) begin
        wready  <= 1'b0;
        awready <= !STALL || ($urandom_range(0, 2) == 0);
        if (awvalid && awready) begin
          int e;
          awready <= 1'b0;
          e = 0;
          if (awburst != 2'b01) e++;
          if ((1 << awsize) != NB) e++;
          if (awlen > 8'd15) e++;
          if ((awaddr >> 12) != ((awaddr + AW'((int'(awlen) + 1) * NB) - 1) >> 12)) e++;
          rule_errs <= rule_errs + e;
          bursts <= bursts + 1;
          addr   <= awaddr;
          left   <= int'(awlen) + 1;
          inb    <= 1'b1;
        end
      end else if (inb) begin
        awready <= 1'b0;
        wready  <= !STALL || ($urandom_range(0, 3) != 0);
        if (wvalid && wready) begin
          int e;
          e = 0;
          if (wstrb != '1) e++;
          if (wlast != (left == 1)) e++;
          rule_errs <= rule_errs + e;
          mem[longint'(addr / NB)] = wdata;
          words <= words + 1;
          addr  <= addr + AW'(NB);
          left  <= left - 1;
          if (left == 1) begin
            inb    <= 1'b0;
            wready <= 1'b0;
            bvalid <= 1'b1;
            bresp  <= 2'b00;
          end
        end
      end
    end
  end
endmodule
