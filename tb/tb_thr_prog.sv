// tb_thr_prog: programs the thresholds of reference layers FIRST..LAST
// (those that are thresholded) over the configuration bus, one broadcast
// write per threshold index, once `go` is high; raises `done` afterwards.
module tb_thr_prog #(
  parameter int FIRST = 0,
  parameter int LAST  = 0
) (
  input  logic               clk,
  input  logic               go,
  output finn_pkg::thr_cfg_t cfg,
  output logic               done
);
  initial begin
    cfg  = '0;
    done = 1'b0;
    wait (go);
    for (int l = FIRST; l <= LAST; l++)
      if (tb_ref_pkg::geo_q[l] != 0)
        for (int i = 0; i < 15; i++) begin
          @(negedge clk);
          cfg = '{we: 1'b1, bcast: 1'b1, layer: 8'(l), ch: '0, idx: 4'(i),
                  data: 32'(tb_ref_pkg::threshold(l, i))};
        end
    @(negedge clk);
    cfg  = '0;
    done = 1'b1;
  end
endmodule
