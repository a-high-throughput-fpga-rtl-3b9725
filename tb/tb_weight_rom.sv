// tb_weight_rom: loads random words through the load port and reads them
// back in random order, checking the one-cycle read latency.
//
// On-chip FRCE weights follow the paper; the load port is this design's own.
module tb_weight_rom;
  import lwcnn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int D = 54, PW = 6;
  logic ld_en, rd_en;
  logic [$clog2(D)-1:0] ld_addr, rd_addr;
  data_t [PW-1:0] ld_data, rd_data;
  data_t [PW-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  weight_rom #(.DEPTH(D), .PW(PW)) dut (.*);

  initial begin
    ld_en = 0; rd_en = 0; ld_addr = '0; rd_addr = '0; ld_data = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      ld_en = 1; ld_addr = a[$clog2(D)-1:0];
      for (int l = 0; l < PW; l++) ld_data[l] = data_t'($urandom);
      ref_mem[a] = ld_data;
    end
    @(negedge clk); ld_en = 0;
    for (int i = 0; i < 200; i++) begin
      int a;
      a = $urandom_range(D - 1);
      @(negedge clk); rd_en = 1; rd_addr = a[$clog2(D)-1:0];
      @(negedge clk); rd_en = 0; rd_addr = '0;
      checks++;
      if (rd_data != ref_mem[a]) begin failures++; $display("addr %0d got %h exp %h", a, rd_data, ref_mem[a]); end
    end
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
