// conv_input_generator: sliding-window generator (FINN ConvolutionInputGenerator).
//
// Turns a (padded) IH x IW pixel stream into the columns of the "image
// matrix" of the convolution: for every output position (oy, ox) it emits
// the K x K window, kernel position major (row by row) and channels
// interleaved inside each position, cut into slices of SIMD channels. One
// output pixel therefore takes K*K*C/SIMD beats, matching the column order
// of the interleaved filter matrix the MVAU holds.
//
// How it works: a ring buffer of R = K+S rows of whole pixels. The writer
// fills rows while their slot is free; the reader emits output row oy once
// rows oy*S .. oy*S+K-1 are complete. Writer and reader run at the same
// time, so in steady state the next S rows arrive while the current output
// row is produced. At the end of a frame both sides wait for each other and
// restart together. Output data are read combinationally from the buffer.
//
// From the paper: the function and the interleaved order (Fig. 7: image
// matrix column 0,0,1,1,3,3,4,4 for a 2x2 kernel over two channels). The ring
// of K+S rows and the frame handshake are choices of this design.
module conv_input_generator #(
  parameter int unsigned IH   = 194,
  parameter int unsigned IW   = 322,
  parameter int unsigned C    = 3,
  parameter int unsigned B    = 8,
  parameter int unsigned K    = 3,
  parameter int unsigned S    = 2,
  parameter int unsigned SIMD = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [C*B-1:0]    in_tdata,
  input  logic              in_tvalid,
  output logic              in_tready,
  output logic [SIMD*B-1:0] out_tdata,
  output logic              out_tvalid,
  input  logic              out_tready
);
  localparam int unsigned OH  = (IH - K) / S + 1;
  localparam int unsigned OW  = (IW - K) / S + 1;
  localparam int unsigned R   = (K + S < IH) ? K + S : IH;
  localparam int unsigned CF  = C / SIMD;
  localparam int unsigned RW  = $clog2(IH + R + 1);

  initial begin
    assert (C % SIMD == 0) else $error("C must be a multiple of SIMD");
  end

  logic [C*B-1:0] mem [R*IW];

  // writer
  logic [RW-1:0]             wr_row;   // number of complete rows
  logic [$clog2(IW+1)-1:0]   wr_col;
  logic [$clog2(R+1)-1:0]    wr_slot;
  // reader
  logic [RW-1:0]             rd_top;   // oy*S
  logic [$clog2(OH+1)-1:0]   oy;
  logic [$clog2(OW+1)-1:0]   ox;
  logic [$clog2(K+1)-1:0]    ky, kx;
  logic [$clog2(CF+1)-1:0]   cf;
  logic [$clog2(R+1)-1:0]    top_slot; // slot of row rd_top

  logic wr_done, rd_done, frame_end;
  logic [$clog2(R+1)-1:0]    rd_slot;
  logic [$clog2(R*IW+1)-1:0] rd_addr;
  logic [C*B-1:0]            rd_word;

  always_comb begin
    wr_done   = (wr_row == RW'(IH));
    rd_done   = (oy == OH);
    frame_end = wr_done && rd_done;
    in_tready = !wr_done && (wr_row < rd_top + RW'(R));
    out_tvalid = !rd_done && (wr_row >= rd_top + RW'(K));
    rd_slot   = ($clog2(R+1))'((top_slot + ky >= R) ? top_slot + ky - R : top_slot + ky);
    rd_addr   = rd_slot * IW + ox * S + kx;
    rd_word   = mem[rd_addr];
    out_tdata = rd_word[cf*SIMD*B +: SIMD*B];
  end

  always_ff @(posedge clk) begin
    if (in_tvalid && in_tready)
      mem[wr_slot * IW + wr_col] <= in_tdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_row <= '0; wr_col <= '0; wr_slot <= '0;
      rd_top <= '0; oy <= '0; ox <= '0; ky <= '0; kx <= '0; cf <= '0; top_slot <= '0;
    end else if (frame_end) begin
      wr_row <= '0; wr_col <= '0; wr_slot <= '0;
      rd_top <= '0; oy <= '0; ox <= '0; ky <= '0; kx <= '0; cf <= '0; top_slot <= '0;
    end else begin
      if (in_tvalid && in_tready) begin
        if (wr_col == IW - 1) begin
          wr_col  <= '0;
          wr_row  <= wr_row + 1'b1;
          wr_slot <= (wr_slot == R - 1) ? '0 : wr_slot + 1'b1;
        end else begin
          wr_col <= wr_col + 1'b1;
        end
      end
      if (out_tvalid && out_tready) begin
        if (cf != CF - 1) cf <= cf + 1'b1;
        else begin
          cf <= '0;
          if (kx != K - 1) kx <= kx + 1'b1;
          else begin
            kx <= '0;
            if (ky != K - 1) ky <= ky + 1'b1;
            else begin
              ky <= '0;
              if (ox != OW - 1) ox <= ox + 1'b1;
              else begin
                ox       <= '0;
                oy       <= oy + 1'b1;
                rd_top   <= rd_top + RW'(S);
                top_slot <= ($clog2(R+1))'((top_slot + S >= R) ? top_slot + S - R : top_slot + S);
              end
            end
          end
        end
      end
    end
  end
endmodule
