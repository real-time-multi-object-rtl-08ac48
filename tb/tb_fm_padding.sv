// tb_fm_padding: self-checking test of fm_padding.
// Streams two frames of a 5 x 7 map with 2 channels through a PAD = 2
// padder with random stalls on both sides and compares every output beat
// with the expected padded map (zero border, input pixel inside). Also checks
// that a frame takes no more output beats than (H+4)*(W+4).
module tb_fm_padding;
  localparam int H = 5, W = 7, C = 2, B = 8, PAD = 2;
  localparam int OH = H + 2*PAD, OW = W + 2*PAD;
  logic clk = 0, rst_n = 0;
  logic [C*B-1:0] in_tdata, out_tdata;
  logic in_tvalid, in_tready, out_tvalid, out_tready;
  int checks = 0, failures = 0;

  fm_padding #(.H(H), .W(W), .C(C), .B(B), .PAD(PAD)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [C*B-1:0] pix(int f, int y, int x);
    return {8'(f*50 + y*W + x), 8'(y*16 + x + 1)};
  endfunction

  int iy, ix, f_in;
  // producer
  always_ff @(posedge clk) begin
    if (!rst_n) begin iy <= 0; ix <= 0; f_in <= 0; in_tvalid <= 0; end
    else begin
      if (in_tvalid && in_tready) begin
        if (ix == W-1) begin ix <= 0; if (iy == H-1) begin iy <= 0; f_in <= f_in + 1; end else iy <= iy + 1; end
        else ix <= ix + 1;
      end
      in_tvalid <= (f_in < 2) && ($urandom_range(0, 3) != 0);
    end
  end
  always_comb in_tdata = pix(f_in, iy, ix);
  // next producer beat uses the registered counters; keep tvalid only with data stable
  int oy = 0, ox = 0, of = 0;
  always_ff @(posedge clk) begin
    out_tready <= ($urandom_range(0, 3) != 0);
    if (rst_n && out_tvalid && out_tready) begin
      logic [C*B-1:0] exp;
      exp = (oy >= PAD && oy < PAD+H && ox >= PAD && ox < PAD+W) ? pix(of, oy-PAD, ox-PAD) : '0;
      checks++;
      if (out_tdata !== exp) begin
        failures++;
        if (failures < 5) $display("mismatch f%0d (%0d,%0d): %h vs %h", of, oy, ox, out_tdata, exp);
      end
      if (ox == OW-1) begin ox = 0; if (oy == OH-1) begin oy = 0; of++; end else oy++; end
      else ox++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (of == 2);
    if (checks != 2*OH*OW) failures++;
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
