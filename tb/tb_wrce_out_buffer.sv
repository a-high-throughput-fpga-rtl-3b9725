// tb_wrce_out_buffer: HW=10 positions, PF=4 (3 position groups), PW=3.
// Writes kernel groups as tiles (position groups out of order), commits them
// with 3 and then 2 valid channels (an FGPM-padded group) and checks the
// replay order channel by channel, zeroed positions beyond HW, out_last, the
// free-half count and that the padded channel is never sent.
//
// Discarding padded lanes follows the paper's FGPM; double buffering is this
// design's own.
module tb_wrce_out_buffer;
  import lwcnn_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  localparam int HW = 10, PF = 4, PW = 3, NPG = 3;
  logic wr_en, wr_commit, out_valid, out_ready, out_last;
  logic [15:0] wr_pg, wr_nvalid;
  data_t [PF-1:0][PW-1:0] wr_tile;
  logic [1:0] wr_room;
  data_t [PF-1:0] out_word;
  int checks = 0, failures = 0;

  wrce_out_buffer #(.HW(HW), .PF(PF), .PW(PW)) dut (.*);

  function automatic data_t val(int g, int n, int p);
    return data_t'(g * 40 + n * 12 + p + 1);
  endfunction
  task automatic check(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic write_group(int g, int nv);
    int order[3] = '{2, 0, 1};
    for (int i = 0; i < NPG; i++) begin
      int q;
      q = order[i];
      @(negedge clk);
      wr_en = 1; wr_pg = 16'(q);
      for (int f = 0; f < PF; f++) for (int n = 0; n < PW; n++) wr_tile[f][n] = val(g, n, q*PF+f);
      wr_commit = (i == NPG - 1); wr_nvalid = 16'(nv);
    end
    @(negedge clk); wr_en = 0; wr_commit = 0;
  endtask
  task automatic drain(int g, int nv);
    for (int n = 0; n < nv; n++)
      for (int q = 0; q < NPG; q++) begin
        forever begin
          @(negedge clk); out_ready = ($urandom_range(2) != 0); #1;
          if (out_valid && out_ready) break;
        end
        for (int f = 0; f < PF; f++) begin
          int p;
          p = q*PF + f;
          check($sformatf("g%0d ch %0d pos %0d got %0d", g, n, p, out_word[f]),
                out_word[f] == ((p < HW) ? val(g, n, p) : data_t'(0)));
        end
        check("out_last", out_last == (n == nv - 1 && q == NPG - 1));
        @(posedge clk); #1; out_ready = 0;
      end
  endtask

  initial begin
    wr_en = 0; wr_commit = 0; wr_pg = 0; wr_nvalid = 0; wr_tile = '0; out_ready = 0;
    #2 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check("two free halves", wr_room == 2);
    write_group(0, 3);
    #1 check("one free half", wr_room == 1);
    write_group(1, 2);
    #1 check("no free half", wr_room == 0);
    drain(0, 3);
    drain(1, 2);
    repeat (5) @(negedge clk);
    check("nothing more sent", !out_valid);
    check("both halves free", wr_room == 2);
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
