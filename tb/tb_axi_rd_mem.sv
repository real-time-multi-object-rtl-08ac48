// tb_axi_rd_mem: AXI4 read-slave memory model for the testbenches.
// How it works: accepts one read burst at a time (arready with random
// delays), then returns arlen+1 beats with random rvalid gaps. The data of
// a word depends only on its address, through one of three contents:
//   KIND 0: a hash of the word address (generic DMA tests),
//   KIND 1: the test image of tb_ref_pkg::src_map[0], one 0x00BBGGRR pixel
//           per 32-bit word in raster order from `base`, repeated for
//           FRAMES consecutive frames,
//   KIND 2: the weight words of reference layer LAYER; the layer's words
//           start after those of all lower layers (word offset = sum of
//           their beat counts), so a DMA reading at a wrong offset is seen.
// It also checks the AXI rules the DMAs promise: INCR bursts, full-width
// beats, at most 16 beats, no 4 KiB crossing, and (KIND 1/2) addresses
// inside the buffer. `bursts` and `rule_errs` count bursts and violations.
module tb_axi_rd_mem #(
  parameter int DW    = 128,
  parameter int AW    = 40,
  parameter int KIND  = 0,
  parameter int LAYER = 0,
  parameter int FRAMES = 1,
  parameter bit STALL = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] base,
  input  logic [AW-1:0] araddr,
  input  logic [7:0]    arlen,
  input  logic [2:0]    arsize,
  input  logic [1:0]    arburst,
  input  logic          arvalid,
  output logic          arready,
  output logic [DW-1:0] rdata,
  output logic [1:0]    rresp,
  output logic          rlast,
  output logic          rvalid,
  input  logic          rready,
  output int            bursts,
  output int            rule_errs
);
  localparam int NB = DW / 8;
  logic [AW-1:0] addr;
  int left;

  function automatic logic [DW-1:0] word_at(logic [AW-1:0] a, output bit bad);
    logic [DW-1:0] v;
    longint n, ofs;
    tb_ref_pkg::fmap m;
    bad = 0;
    v = '0;
    n = longint'((a - base) / NB);
    case (KIND)
      1: begin
        m = tb_ref_pkg::src_map[0];
        if (a < base || n >= longint'(m.h * m.w) * FRAMES) bad = 1;
        else begin
          n = n % (m.h * m.w);
          for (int c = 0; c < 3; c++) v[c*8 +: 8] = 8'(m.get(c, int'(n) / m.w, int'(n) % m.w));
        end
      end
      2: begin
        ofs = 0;
        for (int l = 0; l < LAYER; l++) ofs += tb_ref_pkg::weight_beats(l);
        if (a < base || n < ofs || n >= ofs + tb_ref_pkg::weight_beats(LAYER)) bad = 1;
        else v = DW'(tb_ref_pkg::weight_word(LAYER, int'(n - ofs)));
      end
      default:
        for (int i = 0; i < DW / 32; i++) v[i*32 +: 32] = tb_ref_pkg::mix(32'(a / NB) * 32'd13 + 32'(i));
    endcase
    return v;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      arready <= 1'b0; rvalid <= 1'b0; rlast <= 1'b0; rdata <= '0; rresp <= '0;
      left <= 0; bursts <= 0; rule_errs <= 0; addr <= '0;
    end else begin
      bit bad;
      if (left == 0 && !rvalid) begin
        arready <= !STALL || ($urandom_range(0, 2) == 0);
        if (arvalid && arready) begin
          int e;
          arready <= 1'b0;
          e = 0;
          if (arburst != 2'b01) e++;
          if ((1 << arsize) != NB) e++;
          if (arlen > 8'd15) e++;
          if ((araddr >> 12) != ((araddr + AW'((int'(arlen) + 1) * NB) - 1) >> 12)) e++;
          if (araddr % NB != 0) e++;
          rule_errs <= rule_errs + e;
          bursts    <= bursts + 1;
          addr      <= araddr;
          left      <= int'(arlen) + 1;
        end
      end else begin
        arready <= 1'b0;
        if (!rvalid || rready) begin
          if (left > 0 && (!STALL || $urandom_range(0, 3) != 0)) begin
            rvalid <= 1'b1;
            rdata  <= word_at(addr, bad);
            if (bad) rule_errs <= rule_errs + 1;
            rresp  <= 2'b00;
            rlast  <= (left == 1);
            addr   <= addr + AW'(NB);
            left   <= left - 1;
          end else begin
            rvalid <= 1'b0;
            rlast  <= 1'b0;
          end
        end
      end
    end
  end
endmodule
