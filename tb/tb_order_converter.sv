// tb_order_converter: the configuration of the paper's converter figure -
// 6 channels, 4 positions, two banks, 4 positions per word. Each channel-
// first pixel must take three cycles (two channels per cycle), even channels
// must land in bank 0 and odd ones in bank 1 at word c/2, each lane written
// only by its own position (masked writes), and the read side must return
// all 4 positions of a channel in one word. A second map goes into the other
// half while the first is read.
module tb_order_converter;
  import lwcnn_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  localparam int C = 6, HW = 4, PF = 4, NB = 2;
  logic in_valid, in_ready, rd_avail, rd_release, rd_en, mask_write;
  data_t [C-1:0] in_pix;
  data_t [PF-1:0] in_word, rd_word;
  logic [15:0] rd_ch, rd_pg;
  int checks = 0, failures = 0;

  gfm_buffer #(.C(C), .HW(HW), .PF(PF), .NB(NB), .CONVERTER(1'b1)) dut (.*);

  function automatic data_t val(int m, int c, int p);
    return data_t'(m * 50 + c * 8 + p);
  endfunction
  task automatic check(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  int t0;
  task automatic send_map(int m);
    for (int p = 0; p < HW; p++) begin
      @(negedge clk);
      in_valid = 1;
      for (int c = 0; c < C; c++) in_pix[c] = val(m, c, p);
      t0 = 0;
      #1;
      while (!in_ready) begin @(negedge clk); #1; t0++; end
      check($sformatf("pixel %0d took %0d cycles, expected 3", p, t0 + 1), t0 + 1 == 3);
      @(posedge clk); #1;
      in_valid = 0;
    end
  endtask

  task automatic read_map(int m);
    for (int c = 0; c < C; c++) begin
      @(negedge clk); rd_en = 1; rd_ch = 16'(c); rd_pg = 0;
      @(negedge clk); rd_en = 0;
      for (int p = 0; p < PF; p++)
        check($sformatf("map %0d ch %0d pos %0d got %0d", m, c, p, rd_word[p]), rd_word[p] == val(m, c, p));
    end
  endtask

  initial begin
    in_valid = 0; rd_release = 0; rd_en = 0; rd_ch = 0; rd_pg = 0; in_pix = '0; in_word = '0;
    #2 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check("empty at start", !rd_avail);
    send_map(0);
    @(negedge clk);
    check("map 0 available", rd_avail);
    // bank placement as in the figure: even channels bank 0, odd bank 1, word c/2
    for (int c = 0; c < C; c++) begin
      logic [PF*DATA_W-1:0] wv;
      wv = (c % 2 == 0) ? dut.g_bank[0].mem[c/2] : dut.g_bank[1].mem[c/2];
      for (int p = 0; p < PF; p++)
        check($sformatf("bank %0d word %0d lane %0d", c % 2, c / 2, p),
              data_t'(wv[p*DATA_W +: DATA_W]) == val(0, c, p));
    end
    fork
      send_map(1);
      read_map(0);
    join
    @(negedge clk); rd_release = 1; @(negedge clk); rd_release = 0;
    #1 check("map 1 available after release", rd_avail);
    read_map(1);
    @(negedge clk); rd_release = 1; @(negedge clk); rd_release = 0;
    #1 check("empty again", !rd_avail);
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
