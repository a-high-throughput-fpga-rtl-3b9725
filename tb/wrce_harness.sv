// wrce_harness: drives one wrce through NIMG images. A DRAM model streams the
// kernel groups (CIN words of PW weights each, G groups per image, padded
// kernels as zero). The feature map is sent channel-first (CONVERTER=1) or as
// location-first words. Every output word is checked against
// lwcnn_ref_pkg::conv (pointwise). With STALLS=0 the PE-array busy cycles
// must equal NIMG*G*NPG*CIN and the run must not take much longer.
//
// The DRAM weight stream model (every group once per image) follows the
// paper's fully reused weight scheme; timing checks come from this design.
module wrce_harness
  import lwcnn_pkg::*;
  import lwcnn_ref_pkg::*;
#(
  parameter int CIN = 6, parameter int COUT = 10, parameter int H = 5,
  parameter int W = 5, parameter int PF = 4, parameter int PW = 4,
  parameter bit CONVERTER = 1, parameter int SHIFT = 5, parameter bit RELU = 1,
  parameter int NIMG = 2, parameter bit STALLS = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int HW = H*W, NPG = (HW + PF - 1) / PF, G = (COUT + PW - 1) / PW;

  logic in_valid, in_ready, wt_valid, wt_ready, out_valid, out_ready, out_last;
  logic mac_busy, mask_write;
  data_t [CIN-1:0] in_pix;
  data_t [PF-1:0]  in_word, out_word;
  data_t [PW-1:0]  wt_data;

  wrce #(.CIN(CIN), .COUT(COUT), .H(H), .W(W), .PF(PF), .PW(PW),
         .CONVERTER(CONVERTER), .SHIFT(SHIFT), .RELU(RELU)) dut (.*);

  iarr_t wt, x[NIMG], y[NIMG];
  int busy_cycles = 0, masked = 0;
  longint cyc = 0, t_end;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (mac_busy) busy_cycles <= busy_cycles + 1;
    if (mask_write) masked <= masked + 1;
  end

  initial begin
    done = 0; checks = 0; failures = 0;
    in_valid = 0; wt_valid = 0; out_ready = 0; in_pix = '0; in_word = '0; wt_data = '0;
    wt = rand_arr(COUT*CIN, -30, 30);
    for (int i = 0; i < NIMG; i++) begin
      x[i] = rand_arr(HW*CIN, -50, 100);
      y[i] = conv(2, H, W, CIN, COUT, 1, 1, 0, SHIFT, RELU, x[i], wt);
    end
    @(posedge rst_n);
    fork
      begin : fm_drive
        int nbeats;
        nbeats = CONVERTER ? HW : CIN*NPG;
        for (int i = 0; i < NIMG; i++)
          for (int b = 0; b < nbeats; b++) begin
            @(negedge clk);
            if (STALLS) while ($urandom_range(3) == 0) @(negedge clk);
            in_valid = 1;
            if (CONVERTER)
              for (int c = 0; c < CIN; c++) in_pix[c] = data_t'(x[i][b*CIN+c]);
            else
              for (int f = 0; f < PF; f++) begin
                int p, c;
                p = (b % NPG)*PF + f; c = b / NPG;
                in_word[f] = (p < HW) ? data_t'(x[i][p*CIN+c]) : data_t'(0);
              end
            #1;
            while (!in_ready) begin @(negedge clk); #1; end
            @(posedge clk); #1;
            in_valid = 0;
          end
      end
      begin : dram_model
        for (int i = 0; i < NIMG; i++)
          for (int g = 0; g < G; g++)
            for (int c = 0; c < CIN; c++) begin
              @(negedge clk);
              if (STALLS) while ($urandom_range(4) == 0) @(negedge clk);
              wt_valid = 1;
              for (int l = 0; l < PW; l++)
                wt_data[l] = (g*PW+l < COUT) ? data_t'(wt[(g*PW+l)*CIN+c]) : data_t'(0);
              #1;
              while (!wt_ready) begin @(negedge clk); #1; end
              @(posedge clk); #1;
              wt_valid = 0;
            end
      end
      begin : monitor
        for (int i = 0; i < NIMG; i++)
          for (int n = 0; n < COUT; n++)
            for (int q = 0; q < NPG; q++) begin
              forever begin
                @(negedge clk);
                out_ready = STALLS ? ($urandom_range(2) != 0) : 1'b1;
                #1;
                if (out_valid && out_ready) break;
              end
              for (int f = 0; f < PF; f++) begin
                int p;
                p = q*PF + f;
                if (p >= HW) continue;
                checks++;
                if (int'(out_word[f]) != y[i][p*COUT+n]) begin
                  failures++;
                  if (failures < 10) $display("WRCE mismatch img %0d ch %0d pos %0d: got %0d exp %0d",
                                              i, n, p, int'(out_word[f]), y[i][p*COUT+n]);
                end
              end
              checks++;
              if (out_last != ((n % PW == PW-1 || n == COUT-1) && q == NPG-1)) begin
                failures++; $display("WRCE out_last wrong at ch %0d pg %0d", n, q);
              end
              @(posedge clk); #1;
              out_ready = 0;
            end
        t_end = cyc;
      end
    join
    checks++;
    if (busy_cycles != NIMG*G*NPG*CIN) begin
      failures++; $display("WRCE busy %0d expected %0d", busy_cycles, NIMG*G*NPG*CIN);
    end
    if (CONVERTER) begin
      checks++;
      if (masked != NIMG*HW*((CIN+1)/2)) begin
        failures++; $display("WRCE masked writes %0d expected %0d", masked, NIMG*HW*((CIN+1)/2));
      end
    end
    if (!STALLS) begin
      // input fill of one image + compute of all images + drain of last group
      longint bound;
      bound = (CONVERTER ? HW*((CIN+1)/2) : CIN*NPG) + NIMG*G*NPG*CIN + PW*NPG + 40;
      checks++;
      if (t_end > bound) begin failures++; $display("WRCE too slow: %0d > %0d", t_end, bound); end
    end
    done = 1;
  end
endmodule
