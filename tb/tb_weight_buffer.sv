// tb_weight_buffer: CIN=7 words of PW=3 weights per kernel group. Loads
// group 0, then group 1 into the other half while group 0 is read, checks
// that a third group is held off while both halves are full, and that each
// half reads back its own group after release.
//
// The ping-pong weight buffer follows the paper; sizes are the testbench's own.
module tb_weight_buffer;
  import lwcnn_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  localparam int CIN = 7, PW = 3;
  logic wt_valid, wt_ready, rd_avail, rd_release, rd_en;
  data_t [PW-1:0] wt_data, rd_data;
  logic [15:0] rd_addr;
  int checks = 0, failures = 0;

  weight_buffer #(.CIN(CIN), .PW(PW)) dut (.*);

  function automatic data_t [PW-1:0] val(int g, int a);
    data_t [PW-1:0] v;
    for (int l = 0; l < PW; l++) v[l] = data_t'(g * 40 + a * 4 + l);
    return v;
  endfunction
  task automatic check(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic load(int g);
    for (int a = 0; a < CIN; a++) begin
      @(negedge clk); wt_valid = 1; wt_data = val(g, a);
      #1;
      while (!wt_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1;
      wt_valid = 0;
    end
  endtask
  task automatic readg(int g);
    for (int a = CIN - 1; a >= 0; a--) begin
      @(negedge clk); rd_en = 1; rd_addr = 16'(a);
      @(negedge clk); rd_en = 0;
      check($sformatf("group %0d word %0d", g, a), rd_data == val(g, a));
    end
    @(negedge clk); rd_release = 1; @(negedge clk); rd_release = 0;
  endtask

  initial begin
    wt_valid = 0; rd_release = 0; rd_en = 0; rd_addr = 0; wt_data = '0;
    #2 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check("not available at start", !rd_avail);
    load(0);
    #1 check("group 0 available", rd_avail);
    load(1);
    @(negedge clk);
    check("held off with both halves full", !wt_ready);
    fork
      readg(0);
      load(2);
    join
    readg(1);
    readg(2);
    #1 check("empty at end", !rd_avail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
