// tb_mot_pl_top: end-to-end test of the programmable-logic top level.
// How it works: the top is built for a 64 x 64 image with base width BW = 8
// (the full 320 x 192, BW = 16 build is exercised by tb_mot_pl_top_full).
// AXI memory models stand in for the processor's DDR: one returns the test
// image (0x00BBGGRR words), 48 return the weight words of each layer at
// the offsets the top computes, and 3 capture the head outputs. Thresholds
// are written over the configuration bus, then two back-to-back frames are
// started with one `frame_start` (frames = 2); after `frame_done` the
// output buffers of both frames are read back and compared word by word
// with the integer reference network.
// Mechanisms counted (the test fails if one never happens): input-stream
// back-pressure, output-stream back-pressure (DMA waiting for the bus),
// weight-stream stalls, AXI read data gaps, all four long skip FIFOs
// holding data, 4 KiB burst splitting on the weight buffers, and zero AXI
// rule violations or DMA errors.
// Rate: the first frame's latency must stay below the sum of the per-layer
// ideal MVAU cycle counts, and the frame period (second frame complete
// minus first) within twice the slowest MVAU's cycles per frame plus 1000,
// which only holds if the two frames overlap in the pipeline.
// Interface/timing: watchdog of 4,000,000 cycles.
module tb_mot_pl_top;
  import tb_ref_pkg::*;
  localparam int IH = 64, IW = 64, BW = 8, AW = 40, NB = 21;
  tb_mot_pl_top_env #(.IH(IH), .IW(IW), .BW(BW), .FRAMES(2), .WATCHDOG(4000000)) env ();
endmodule
