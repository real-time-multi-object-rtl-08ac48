// upsample: nearest-neighbour upsampling of a whole-pixel stream by an
// integer factor F in both directions (F = 2 in YOLOv8).
//
// The first copy of every input row is produced while the row is read in:
// each input pixel is repeated F times and written to a one-row buffer. The
// remaining F-1 copies of the row are replayed from that buffer while the
// input waits. Output data are combinational from the input or the buffer.
//
// The paper only names the block (Fig. 3); nearest-neighbour with factor 2
// follows YOLOv8, the row buffer is this design's choice.
module upsample #(
  parameter int unsigned H = 6,
  parameter int unsigned W = 10,
  parameter int unsigned C = 256,
  parameter int unsigned B = 4,
  parameter int unsigned F = 2
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
  logic [C*B-1:0]           rowbuf [W];
  logic [$clog2(W+1)-1:0]   col;
  logic [$clog2(F+1)-1:0]   hrep, vrep;
  logic                     live;

  always_comb begin
    live       = (vrep == 0);
    out_tdata  = live ? in_tdata : rowbuf[col];
    out_tvalid = live ? in_tvalid : 1'b1;
    in_tready  = live && out_tready && (hrep == F - 1);
  end

  always_ff @(posedge clk) begin
    if (live && in_tvalid && hrep == 0) rowbuf[col] <= in_tdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col <= '0; hrep <= '0; vrep <= '0;
    end else if (out_tvalid && out_tready) begin
      if (hrep != F - 1) hrep <= hrep + 1'b1;
      else begin
        hrep <= '0;
        if (col != W - 1) col <= col + 1'b1;
        else begin
          col  <= '0;
          vrep <= (vrep == F - 1) ? '0 : vrep + 1'b1;
        end
      end
    end
  end
endmodule
