// tb_fc_ce: the weight reused CE used as the fully connected CE: a 1x1 map
// of 64 inputs to 10 outputs (Pf 1, Pw 4, last kernel group padded), three
// inputs back to back, weights streamed from a DRAM model, with and without
// stalls; checks values and the CIN cycles per kernel group.
//
// The paper names an FC CE but gives no insides; the 1x1-map WRCE is this
// design's choice, and the sizes are the testbench's own.
module tb_fc_ce;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  localparam int N = 2;
  logic [N-1:0] done;
  int checks [N], failures [N];

  wrce_harness #(.CIN(64), .COUT(10), .H(1), .W(1), .PF(1), .PW(4), .CONVERTER(0),
                 .RELU(0), .SHIFT(7), .NIMG(3))
    h0 (.clk, .rst_n, .done(done[0]), .checks(checks[0]), .failures(failures[0]));
  wrce_harness #(.CIN(64), .COUT(10), .H(1), .W(1), .PF(1), .PW(4), .CONVERTER(0),
                 .RELU(0), .SHIFT(7), .NIMG(3), .STALLS(0))
    h1 (.clk, .rst_n, .done(done[1]), .checks(checks[1]), .failures(failures[1]));

  int tc, tf;
  initial begin
    #2 rst_n = 0;
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
    $display("TB_RESULT checks=%0d failures=%0d", tc, tf);
    $finish;
  end
endmodule
