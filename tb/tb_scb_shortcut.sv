// tb_scb_shortcut: C=4, DEPTH=6. A model of the main branch returns each
// copied pixel transformed (x*3-5, saturated) after a random delay; every SCB
// output must equal the saturating sum of that result and the delayed input.
// With the branch held up, the SCB must stop accepting input after exactly
// DEPTH pixels.
//
// The stream copy and delayed buffer follow the paper; the depths tested are
// the testbench's own.
module tb_scb_shortcut;
  import lwcnn_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  localparam int C = 4, DEPTH = 6, NPIX = 300;
  logic in_valid, in_ready, br_valid, br_ready, res_valid, res_ready, out_valid, out_ready;
  data_t [C-1:0] in_pix, br_pix, res_pix, out_pix;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;
  data_t [C-1:0] sent[$], branch_q[$];
  bit hold = 1;

  scb_shortcut #(.C(C), .W(3), .DEPTH(DEPTH)) dut (.*);

  function automatic int s8(int v);
    return v > 127 ? 127 : v < -128 ? -128 : v;
  endfunction

  // main branch model: always accepts copies, returns results when not held
  assign br_ready = 1'b1;
  always @(posedge clk) begin
    if (br_valid && br_ready) begin
      data_t [C-1:0] r;
      for (int c = 0; c < C; c++) r[c] = data_t'(s8(int'(br_pix[c]) * 3 - 5));
      branch_q.push_back(r);
    end
  end
  always @(negedge clk) begin
    if (!res_valid || res_ready) begin
      if (!hold && branch_q.size() > 0 && $urandom_range(2) != 0) begin
        res_valid <= 1; res_pix <= branch_q.pop_front();
      end else if (res_ready) res_valid <= 0;
    end
    out_ready <= ($urandom_range(3) != 0);
  end
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      data_t [C-1:0] x;
      x = sent.pop_front();
      for (int c = 0; c < C; c++) begin
        checks++;
        if (int'(out_pix[c]) != s8(s8(int'(x[c]) * 3 - 5) + int'(x[c]))) begin
          failures++; $display("mismatch ch %0d got %0d", c, out_pix[c]);
        end
      end
    end
  end

  int accepted = 0, n_out = 0;
  always @(posedge clk) if (out_valid && out_ready) n_out++;
  initial begin
    in_valid = 0; in_pix = '0; res_valid = 0; res_pix = '0; out_ready = 0;
    #2 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      for (int i = 0; i < NPIX; i++) begin
        @(negedge clk);
        in_valid = 1;
        for (int c = 0; c < C; c++) in_pix[c] = data_t'($urandom);
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        sent.push_back(in_pix);
        @(posedge clk); #1;
        accepted++;
        in_valid = 0;
      end
      begin
        repeat (40) @(posedge clk);
        checks++;
        if (accepted != DEPTH || level != DEPTH) begin
          failures++; $display("held branch: accepted %0d, expected %0d", accepted, DEPTH);
        end
        hold = 0;
      end
    join
    wait (n_out == NPIX);
    repeat (3) @(posedge clk);
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
