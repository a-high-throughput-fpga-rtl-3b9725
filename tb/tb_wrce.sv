// tb_wrce: self-checking test of the weight reused CE. Instances: location-
// first input with random stalls; converter input (channel-first, odd channel
// count, HW not a multiple of PF) with stalls; and a stall-free instance that
// checks the PE array runs G*NPG*CIN cycles per image back to back.
//
// The weight-once schedule and converter follow the paper; sizes and the
// G*NPG*CIN cycle budget come from this design.
module tb_wrce;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  localparam int N = 3;
  logic [N-1:0] done;
  int checks [N], failures [N];

  wrce_harness #(.CIN(6), .COUT(10), .H(4), .W(4), .PF(4), .PW(4), .CONVERTER(0))
    h0 (.clk, .rst_n, .done(done[0]), .checks(checks[0]), .failures(failures[0]));
  wrce_harness #(.CIN(7), .COUT(9), .H(5), .W(3), .PF(4), .PW(3), .CONVERTER(1), .RELU(0))
    h1 (.clk, .rst_n, .done(done[1]), .checks(checks[1]), .failures(failures[1]));
  wrce_harness #(.CIN(8), .COUT(12), .H(4), .W(6), .PF(8), .PW(4), .CONVERTER(0), .STALLS(0), .NIMG(3))
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
