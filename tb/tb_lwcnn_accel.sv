// tb_lwcnn_accel: end-to-end test of the accelerator slice at a reduced
// image size (24x24 input, 6x6 at the SCB and WRCEs), two images back to back.
//
// Counts every mechanism (input backpressure, padding, next image streamed
// during compute, FGPM padded lanes, shortcut adds, converter masked writes,
// GFM and weight ping-pong overlap, both output halves full, result
// backpressure) and fails if one never occurs. The layer slice is this design's own choice.
module tb_lwcnn_accel;
  accel_harness #(.FULL(1'b0), .IMG(24), .NIMG(2), .MAXCYC(400000), .LONG_STALL(12000)) h ();
endmodule
