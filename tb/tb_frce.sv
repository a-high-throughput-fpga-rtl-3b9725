// tb_frce: self-checking test of the feature-map reused CE in its three
// layer types. STC: 3x3 stride 2 with padding and a kernel count (10) that is
// not a multiple of PW (4), so FGPM lane padding is exercised. DWC: 3x3
// stride 1 with padding. PWC: 1x1, PW=5 for 16 kernels. Each runs two images
// back to back with random stalls on both streams; a second PWC and STC copy
// run without stalls and check the rate of one pixel per G*T cycles.
//
// Layer types and padding rules follow the paper; sizes are the testbench's own.
module tb_frce;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  localparam int N = 5;
  logic [N-1:0] done;
  int checks [N], failures [N];

  frce_harness #(.TYP(0), .H(9), .W(7), .CIN(3), .COUT(10), .K(3), .S(2), .PAD(1), .PW(4))
    h0 (.clk, .rst_n, .done(done[0]), .checks(checks[0]), .failures(failures[0]));
  frce_harness #(.TYP(1), .H(6), .W(8), .CIN(12), .COUT(12), .K(3), .S(1), .PAD(1), .PW(4), .RELU(0))
    h1 (.clk, .rst_n, .done(done[1]), .checks(checks[1]), .failures(failures[1]));
  frce_harness #(.TYP(2), .H(5), .W(6), .CIN(8), .COUT(16), .PW(5), .SHIFT(5))
    h2 (.clk, .rst_n, .done(done[2]), .checks(checks[2]), .failures(failures[2]));
  frce_harness #(.TYP(2), .H(5), .W(6), .CIN(8), .COUT(16), .PW(5), .SHIFT(5), .STALLS(0))
    h3 (.clk, .rst_n, .done(done[3]), .checks(checks[3]), .failures(failures[3]));
  frce_harness #(.TYP(0), .H(10), .W(10), .CIN(3), .COUT(8), .K(3), .S(1), .PAD(1), .PW(8), .STALLS(0))
    h4 (.clk, .rst_n, .done(done[4]), .checks(checks[4]), .failures(failures[4]));

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
    repeat (200000) @(posedge clk);
    tc = 0; tf = 1;
    for (int i = 0; i < N; i++) begin tc += checks[i]; tf += failures[i]; end
    $display("watchdog expired, done=%b", done);
    $display("TB_RESULT checks=%0d failures=%0d", tc, tf);
    $finish;
  end
endmodule
