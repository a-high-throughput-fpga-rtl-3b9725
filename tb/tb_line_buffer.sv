// tb_line_buffer: W=5, H=4, C=2, NL=3. The testbench plays the CE
// controller: it moves free_idx forward and checks that exactly NL*W pixels
// beyond free_idx are accepted, that stored pixels read back from the right
// slot after wrapping, that out-of-image coordinates read as zero (padding is
// never stored), and that a second image continues in the circular store.
//
// The K-line storage, padding on read and the lifetime rule follow the paper;
// the sizes are the testbench's own.
module tb_line_buffer;
  import lwcnn_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  localparam int W = 5, H = 4, C = 2, NL = 3;
  logic in_valid, in_ready, rd_en, rd_img_done;
  data_t [C-1:0] in_pix, rd_pix;
  logic [31:0] wr_count, free_idx;
  logic signed [15:0] rd_row, rd_col;
  int checks = 0, failures = 0;

  line_buffer #(.W(W), .H(H), .C(C), .NL(NL)) dut (.*);

  function automatic data_t [C-1:0] pix(int img, int p);
    data_t [C-1:0] v;
    for (int c = 0; c < C; c++) v[c] = data_t'(img * 64 + p * 2 + c + 1);
    return v;
  endfunction

  task automatic check(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stream pixels of `img` from index p0 for as long as in_ready allows
  task automatic push_until_blocked(int img, inout int p, input int maxp);
    forever begin
      if (p >= maxp) return;
      @(negedge clk);
      in_valid = 1; in_pix = pix(img, p);
      #1;
      if (!in_ready) begin @(negedge clk); in_valid = 0; return; end
      @(posedge clk); #1;
      p++;
      in_valid = 0;
    end
  endtask

  task automatic read(int r, int c, data_t [C-1:0] expv, string what);
    @(negedge clk);
    rd_en = 1; rd_row = 16'(r); rd_col = 16'(c);
    @(negedge clk);
    rd_en = 0;
    check($sformatf("%s (%0d,%0d) got %h exp %h", what, r, c, rd_pix, expv), rd_pix == expv);
  endtask

  int p;
  initial begin
    in_valid = 0; rd_en = 0; rd_img_done = 0; in_pix = '0; free_idx = 0; rd_row = 0; rd_col = 0;
    #2 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // image 0: with free_idx = 0 exactly NL*W pixels fit
    p = 0;
    push_until_blocked(0, p, H*W);
    check($sformatf("accepted %0d pixels, expected %0d", p, NL*W), p == NL*W);
    check("wr_count", wr_count == NL*W);
    for (int r = 0; r < NL; r++) for (int c = 0; c < W; c++) read(r, c, pix(0, r*W+c), "stored");
    // padding reads
    read(-1, 2, '0, "pad top");
    read(1, -1, '0, "pad left");
    read(2, W, '0, "pad right");
    read(H, 0, '0, "pad bottom");
    // free two pixels of row 0: two more pixels of row 3 go in, then stall
    free_idx = 2;
    push_until_blocked(0, p, H*W);
    check($sformatf("after freeing 2: %0d", p), p == NL*W + 2);
    read(3, 0, pix(0, 15), "wrapped row 3");
    read(3, 1, pix(0, 16), "wrapped row 3");
    read(0, 2, pix(0, 2), "not overwritten");
    read(1, 0, pix(0, 5), "not overwritten");
    // release the whole image 0 except row 3; finish image 0 and start image 1
    free_idx = 3*W;
    push_until_blocked(0, p, H*W);
    check("image 0 complete", p == H*W);
    for (int c = 0; c < W; c++) read(3, c, pix(0, 15+c), "row 3");
    @(negedge clk); rd_img_done = 1; @(negedge clk); rd_img_done = 0;
    p = 0;
    push_until_blocked(1, p, H*W);
    check($sformatf("image 1 accepted %0d", p), p == 2*W);
    for (int r = 0; r < 2; r++) for (int c = 0; c < W; c++) read(r, c, pix(1, r*W+c), "image 1");
    read(-1, 0, '0, "image 1 pad");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
