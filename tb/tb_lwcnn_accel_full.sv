// tb_lwcnn_accel_full: the accelerator with every parameter at its default
// (224x224x3 input, 56x56 at the SCB and WRCEs), two images end to end, with
// a long result stall so that the ping-pong buffers of the WRCE group fill.
//
// The 224x224 input size and 8-bit data are the paper's; the layer slice is
// this design's own.
module tb_lwcnn_accel_full;
  accel_harness #(.FULL(1'b1), .IMG(224), .NIMG(2), .MAXCYC(4000000), .LONG_STALL(800000)) h ();
endmodule
