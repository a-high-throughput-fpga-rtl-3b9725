// frce_harness: drives one frce instance through NIMG images with random
// input gaps and output backpressure, and checks every output pixel against
// lwcnn_ref_pkg::conv. Reports counts through its ports. With STALLS=0 it
// also checks the rate: the run must take G*T cycles per output pixel plus a
// small fill latency.
//
// The cycle count it expects (G*T per output pixel) follows from the FRCE
// schedule of this design.
module frce_harness
  import lwcnn_pkg::*;
  import lwcnn_ref_pkg::*;
#(
  parameter int TYP = 0, parameter int H = 8, parameter int W = 8,
  parameter int CIN = 3, parameter int COUT = 10, parameter int K = 3,
  parameter int S = 2, parameter int PAD = 1, parameter int PW = 4,
  parameter int SHIFT = 6, parameter bit RELU = 1, parameter int NIMG = 2,
  parameter bit STALLS = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam layer_e LT = (TYP == 0) ? LAYER_STC : (TYP == 1) ? LAYER_DWC : LAYER_PWC;
  localparam int KE = (TYP == 2) ? 1 : K;
  localparam int SE = (TYP == 2) ? 1 : S;
  localparam int PE = (TYP == 2) ? 0 : PAD;
  localparam int HO = (H + 2*PE - KE) / SE + 1;
  localparam int WO = (W + 2*PE - KE) / SE + 1;
  localparam int G  = (COUT + PW - 1) / PW;
  localparam int T  = (TYP == 0) ? K*K*CIN : (TYP == 1) ? K*K : CIN;
  localparam int WD = G * T;

  logic in_valid, in_ready, out_valid, out_ready, wld_en, mac_busy;
  data_t [CIN-1:0]  in_pix;
  data_t [COUT-1:0] out_pix;
  logic [$clog2(WD)-1:0] wld_addr;
  data_t [PW-1:0] wld_data;

  frce #(.TYPE(LT), .H(H), .W(W), .CIN(CIN), .COUT(COUT), .K(K), .S(S),
         .PAD(PAD), .PW(PW), .SHIFT(SHIFT), .RELU(RELU)) dut (.*);

  iarr_t wt, x[NIMG], y[NIMG];
  int busy_cycles = 0;
  longint t_first, t_last, cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  always_ff @(posedge clk) if (mac_busy) busy_cycles <= busy_cycles + 1;

  initial begin
    done = 0; checks = 0; failures = 0;
    in_valid = 0; out_ready = 0; wld_en = 0; wld_addr = '0; wld_data = '0; in_pix = '0;
    wt = rand_arr((TYP == 1) ? COUT*K*K : (TYP == 0) ? COUT*K*K*CIN : COUT*CIN, -20, 20);
    for (int i = 0; i < NIMG; i++) begin
      x[i] = rand_arr(H*W*CIN, -60, 100);
      y[i] = conv(TYP, H, W, CIN, COUT, K, S, PAD, SHIFT, RELU, x[i], wt);
    end
    @(posedge rst_n);
    // load weight ROM
    for (int a = 0; a < WD; a++) begin
      @(negedge clk);
      wld_en = 1; wld_addr = a[$clog2(WD)-1:0];
      for (int l = 0; l < PW; l++) wld_data[l] = data_t'(frce_rom(TYP, CIN, COUT, K, PW, a, l, wt));
    end
    @(negedge clk); wld_en = 0;
    fork
      begin : drive
        for (int i = 0; i < NIMG; i++)
          for (int p = 0; p < H*W; p++) begin
            @(negedge clk);
            if (STALLS) while ($urandom_range(3) == 0) @(negedge clk);
            in_valid = 1;
            for (int c = 0; c < CIN; c++) in_pix[c] = data_t'(x[i][p*CIN+c]);
            #1;
            while (!in_ready) begin @(negedge clk); #1; end
            @(posedge clk); #1;
            in_valid = 0;
          end
      end
      begin : monitor
        for (int i = 0; i < NIMG; i++)
          for (int p = 0; p < HO*WO; p++) begin
            forever begin
              @(negedge clk);
              out_ready = STALLS ? ($urandom_range(2) != 0) : 1'b1;
              #1;
              if (out_valid && out_ready) break;
            end
            if (i == 0 && p == 0) t_first = cyc;
            t_last = cyc;
            for (int n = 0; n < COUT; n++) begin
              checks++;
              if (int'(out_pix[n]) != y[i][p*COUT+n]) begin
                failures++;
                if (failures < 10) $display("FRCE%0d mismatch img %0d pix %0d ch %0d: got %0d exp %0d",
                                            TYP, i, p, n, int'(out_pix[n]), y[i][p*COUT+n]);
              end
            end
            @(posedge clk); #1;
            out_ready = 0;
          end
      end
    join
    if (!STALLS) begin
      // steady state: one output pixel every G*T cycles (clock period 10)
      longint per;
      per = (t_last - t_first) / (NIMG*HO*WO - 1);
      checks++;
      if (per > G*T + 1) begin
        failures++;
        $display("FRCE%0d rate: %0d cycles per pixel, expected %0d", TYP, per, G*T);
      end
      checks++;
      if (busy_cycles != NIMG*HO*WO*G*T) begin
        failures++;
        $display("FRCE%0d busy %0d expected %0d", TYP, busy_cycles, NIMG*HO*WO*G*T);
      end
    end
    done = 1;
  end
endmodule
