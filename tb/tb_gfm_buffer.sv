// tb_gfm_buffer: location-first ping-pong global FM buffer, C=5 channels,
// HW=10 positions, 4 positions per word (3 words per channel), 2 banks.
// Fills map 0, checks that map 1 can be written while map 0 is read, that a
// third map is held off (in_ready low) while both halves are full, and that
// every word reads back from the right half.
//
// The ping-pong behaviour follows the paper; the sizes are the testbench's own.
module tb_gfm_buffer;
  import lwcnn_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  localparam int C = 5, HW = 10, PF = 4, NPG = 3;
  logic in_valid, in_ready, rd_avail, rd_release, rd_en, mask_write;
  data_t [C-1:0] in_pix;
  data_t [PF-1:0] in_word, rd_word;
  logic [15:0] rd_ch, rd_pg;
  int checks = 0, failures = 0;

  gfm_buffer #(.C(C), .HW(HW), .PF(PF), .NB(2), .CONVERTER(1'b0)) dut (.*);

  function automatic data_t val(int m, int c, int q, int f);
    return data_t'(m * 60 + c * 12 + q * 4 + f);
  endfunction
  task automatic check(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic send_map(int m);
    for (int c = 0; c < C; c++)
      for (int q = 0; q < NPG; q++) begin
        @(negedge clk);
        in_valid = 1;
        for (int f = 0; f < PF; f++) in_word[f] = val(m, c, q, f);
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1;
        in_valid = 0;
      end
  endtask
  task automatic read_map(int m);
    for (int c = 0; c < C; c++)
      for (int q = 0; q < NPG; q++) begin
        @(negedge clk); rd_en = 1; rd_ch = 16'(c); rd_pg = 16'(q);
        @(negedge clk); rd_en = 0;
        check($sformatf("map %0d ch %0d pg %0d", m, c, q), rd_word == {val(m,c,q,3), val(m,c,q,2), val(m,c,q,1), val(m,c,q,0)});
      end
  endtask

  initial begin
    in_valid = 0; rd_release = 0; rd_en = 0; rd_ch = 0; rd_pg = 0; in_pix = '0; in_word = '0;
    #2 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    send_map(0);
    #1 check("map 0 available", rd_avail);
    fork
      send_map(1);
      read_map(0);
    join
    // both halves full now: a new beat must wait
    @(negedge clk); in_valid = 1; #1;
    check("held off while both halves full", !in_ready);
    check("no masked writes in location-first mode", !mask_write);
    @(negedge clk); in_valid = 0;
    rd_release = 1; @(negedge clk); rd_release = 0;
    #1 check("half free again", in_ready);
    fork
      read_map(1);
      send_map(2);
    join
    @(negedge clk); rd_release = 1; @(negedge clk); rd_release = 0;
    read_map(2);
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
