// tb_mac_pe: random kernels of random length through one PE; checks the
// final sum and that sum_valid pulses exactly one cycle after `last`, with
// kernels issued back to back.
//
// The multiplier-plus-accumulator PE follows the paper; the flag interface is
// this design's own.
module tb_mac_pe;
  import lwcnn_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic en, first, last, sum_valid;
  data_t fm, wt;
  acc_t sum;
  int checks = 0, failures = 0;
  longint exp_q[$];

  mac_pe dut (.*);

  // compare at every valid result
  always @(posedge clk) begin
    #1;
    if (sum_valid) begin
      longint e;
      e = exp_q.pop_front();
      checks++;
      if (longint'(sum) != e) begin
        failures++; $display("mac_pe: got %0d exp %0d", sum, e);
      end
    end
  end

  initial begin
    en = 0; first = 0; last = 0; fm = 0; wt = 0;
    #2 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      int len;
      longint acc;
      len = 1 + $urandom_range(40);
      acc = 0;
      for (int t = 0; t < len; t++) begin
        @(negedge clk);
        en = 1; first = (t == 0); last = (t == len - 1);
        fm = data_t'($urandom); wt = data_t'($urandom);
        if (k == 0) begin fm = -128; wt = -128; end   // extreme operands
        acc += longint'(fm) * longint'(wt);
        if (last) exp_q.push_back(acc);
      end
      if ($urandom_range(3) == 0) begin @(negedge clk); en = 0; first = 0; last = 0; end
    end
    @(negedge clk); en = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("mac_pe: %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
