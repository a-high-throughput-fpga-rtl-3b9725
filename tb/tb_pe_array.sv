// tb_pe_array: a 3x4 array with broadcast operands and a 1x4 depthwise array
// with per-row operands; every PE sum is compared with a software product sum.
//
// The broadcast directions follow the paper; the sizes echo its CE figure (3x4).
module tb_pe_array;
  import lwcnn_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  localparam int PF = 3, PW = 4;
  logic en, first, last, v0, v1;
  data_t [PF-1:0] fm;
  data_t [PW-1:0] fm_dw, wt;
  acc_t [PF-1:0][PW-1:0] s0;
  acc_t [0:0][PW-1:0] s1;
  int checks = 0, failures = 0;
  longint e0[PF][PW], e1[PW];

  pe_array #(.PF(PF), .PW(PW), .DEPTHWISE(0)) u0 (.clk, .rst_n, .en, .first, .last,
    .fm, .fm_dw, .wt, .sum(s0), .sum_valid(v0));
  pe_array #(.PF(1), .PW(PW), .DEPTHWISE(1)) u1 (.clk, .rst_n, .en, .first, .last,
    .fm(fm[0:0]), .fm_dw, .wt, .sum(s1), .sum_valid(v1));

  initial begin
    en = 0; first = 0; last = 0; fm = '0; fm_dw = '0; wt = '0;
    #2 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 100; k++) begin
      int len;
      len = 1 + $urandom_range(30);
      foreach (e0[f, w]) e0[f][w] = 0;
      foreach (e1[w]) e1[w] = 0;
      for (int t = 0; t < len; t++) begin
        @(negedge clk);
        en = 1; first = (t == 0); last = (t == len - 1);
        for (int f = 0; f < PF; f++) fm[f] = data_t'($urandom);
        for (int w = 0; w < PW; w++) begin fm_dw[w] = data_t'($urandom); wt[w] = data_t'($urandom); end
        foreach (e0[f, w]) e0[f][w] += longint'(fm[f]) * wt[w];
        foreach (e1[w]) e1[w] += longint'(fm_dw[w]) * wt[w];
      end
      @(negedge clk); en = 0; first = 0; last = 0;
      checks++;
      if (!(v0 && v1)) begin failures++; $display("sum_valid missing"); end
      foreach (e0[f, w]) begin
        checks++;
        if (longint'(s0[f][w]) != e0[f][w]) begin failures++; $display("PE(%0d,%0d) got %0d exp %0d", f, w, s0[f][w], e0[f][w]); end
      end
      foreach (e1[w]) begin
        checks++;
        if (longint'(s1[0][w]) != e1[w]) begin failures++; $display("DW PE %0d got %0d exp %0d", w, s1[0][w], e1[w]); end
      end
    end
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
