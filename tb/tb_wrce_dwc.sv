// tb_wrce_dwc: the weight reused depthwise CE in three configurations:
// 3x3 stride 1 pad 1 on a 5x6 plane with 4 lanes (a partly filled last word
// on input and output); 3x3 stride 2 pad 1 on 7x7 with 8 lanes, more lanes
// than output columns, so one word spans several output rows; and a run
// without stalls that also checks the K*K cycles per output word.
//
// Location-first order and once-per-image weights follow the paper's WRCE;
// the sizes are this testbench's own.
module tb_wrce_dwc;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  localparam int N = 3;
  logic [N-1:0] done;
  int checks [N], failures [N];

  wrce_dwc_harness #(.C(5), .H(5), .W(6), .S(1), .PF(4))
    h0 (.clk, .rst_n, .done(done[0]), .checks(checks[0]), .failures(failures[0]));
  wrce_dwc_harness #(.C(4), .H(7), .W(7), .S(2), .PF(8), .RELU(0))
    h1 (.clk, .rst_n, .done(done[1]), .checks(checks[1]), .failures(failures[1]));
  wrce_dwc_harness #(.C(6), .H(4), .W(4), .S(1), .PF(4), .STALLS(0), .NIMG(3))
    h2 (.clk, .rst_n, .done(done[2]), .checks(checks[2]), .failures(failures[2]));

  int tc, tf;
  initial begin
    #2 rst_n = 0;  // falling edge for the asynchronous resets
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&done);
    tc = 0; tf = 0;
    for (int i = 0; i < N; i++) begin tc += checks[i]; tf += failures[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", tc, tf);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    tc = 0; tf = 1;
    for (int i = 0; i < N; i++) begin tc += checks[i]; tf += failures[i]; end
    $display("watchdog expired, done=%b", done);
    $display("TB_RESULT checks=%0d failures=%0d", tc, tf);
    $finish;
  end
endmodule
