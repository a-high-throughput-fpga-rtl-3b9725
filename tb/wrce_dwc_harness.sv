// wrce_dwc_harness: drives one wrce_dwc through NIMG images. It feeds the
// input location-first (PF positions of one channel per beat, garbage in
// lanes past the end of the plane), plays the DRAM weight stream (K*K
// weights per channel, every channel once per image) and checks every
// output word against lwcnn_ref_pkg::conv in depthwise mode, including the
// zeroed tail lanes and out_last at the end of each channel. With STALLS=1
// all three streams get random gaps. With STALLS=0 it also checks the rate:
// the run may take at most C*NPGO*K*K cycles per image plus a small margin.
//
// The location-first order and the weight-once stream follow the paper's
// WRCE; sizes and the rate margin are this testbench's own.
module wrce_dwc_harness
  import lwcnn_pkg::*;
  import lwcnn_ref_pkg::*;
#(
  parameter int C = 5, parameter int H = 5, parameter int W = 6, parameter int K = 3,
  parameter int S = 1, parameter int PAD = 1, parameter int PF = 4,
  parameter int SHIFT = 5, parameter bit RELU = 1'b1, parameter bit STALLS = 1'b1,
  parameter int NIMG = 2
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int HW = H * W, HO = (H + 2*PAD - K) / S + 1, WO = (W + 2*PAD - K) / S + 1;
  localparam int HWO = HO * WO, NPGI = (HW + PF - 1) / PF, NPGO = (HWO + PF - 1) / PF;
  localparam int KK = K * K;

  logic in_valid, in_ready, wt_valid, wt_ready, out_valid, out_ready, out_last, mac_busy;
  data_t [PF-1:0] in_word, out_word;
  data_t wt_data;

  wrce_dwc #(.C(C), .H(H), .W(W), .K(K), .S(S), .PAD(PAD), .PF(PF), .SHIFT(SHIFT), .RELU(RELU))
    dut (.*);

  iarr_t x [NIMG], wt [NIMG], y [NIMG];
  bit in_done, wt_done;
  int cyc, t_start, t_end;

  initial begin
    for (int i = 0; i < NIMG; i++) begin
      x[i]  = rand_arr(HW * C, -128, 127);
      wt[i] = rand_arr(C * KK, -128, 127);
      y[i]  = conv(1, H, W, C, C, K, S, PAD, SHIFT, RELU, x[i], wt[i]);
    end
  end

  always @(posedge clk) cyc <= cyc + 1;

  // input feeder
  initial begin
    in_valid = 0; in_word = '0; in_done = 0; cyc = 0;
    wait (rst_n === 1'b0); wait (rst_n === 1'b1);
    for (int i = 0; i < NIMG; i++)
      for (int ch = 0; ch < C; ch++)
        for (int pg = 0; pg < NPGI; pg++) begin
          @(negedge clk);
          while (STALLS && ($urandom % 4 == 0)) begin in_valid = 0; @(negedge clk); end
          in_valid = 1;
          for (int f = 0; f < PF; f++) begin
            int p;
            p = pg * PF + f;
            in_word[f] = (p < HW) ? data_t'(x[i][p * C + ch]) : data_t'($urandom);
          end
          #1;
          while (!in_ready) begin @(negedge clk); #1; end
        end
    @(negedge clk); in_valid = 0; in_done = 1;
  end

  // DRAM weight stream
  initial begin
    wt_valid = 0; wt_data = '0; wt_done = 0;
    wait (rst_n === 1'b0); wait (rst_n === 1'b1);
    for (int i = 0; i < NIMG; i++)
      for (int ch = 0; ch < C; ch++)
        for (int t = 0; t < KK; t++) begin
          @(negedge clk);
          while (STALLS && ($urandom % 3 == 0)) begin wt_valid = 0; @(negedge clk); end
          wt_valid = 1; wt_data = data_t'(wt[i][ch * KK + t]);
          #1;
          while (!wt_ready) begin @(negedge clk); #1; end
        end
    @(negedge clk); wt_valid = 0; wt_done = 1;
  end

  // output checker
  int oi, och, opg;
  always @(negedge clk) out_ready <= STALLS ? ($urandom % 3 != 0) : 1'b1;
  initial begin
    done = 0; checks = 0; failures = 0; oi = 0; och = 0; opg = 0; t_start = -1;
    out_ready = 0;
  end
  always @(posedge clk) if (rst_n && t_start < 0 && in_valid) t_start = cyc;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready && !done) begin
      for (int f = 0; f < PF; f++) begin
        int p, e;
        p = opg * PF + f;
        e = (p < HWO) ? y[oi][p * C + och] : 0;
        checks++;
        if (int'(out_word[f]) != e) begin
          failures++;
          if (failures < 8) $display("%m img %0d ch %0d pos %0d: got %0d exp %0d", oi, och, p, out_word[f], e);
        end
      end
      checks++;
      if (out_last != (opg == NPGO - 1)) begin
        failures++; $display("%m out_last wrong at ch %0d opg %0d", och, opg);
      end
      if (opg == NPGO - 1) begin
        opg = 0;
        if (och == C - 1) begin
          och = 0; oi++;
          if (oi == NIMG) begin
            t_end = cyc;
            if (!STALLS) begin
              checks++;
              if (t_end - t_start > NIMG * C * NPGO * KK + 2 * C * NPGI + 40) begin
                failures++;
                $display("%m too slow: %0d cycles for %0d images", t_end - t_start, NIMG);
              end
            end
            done = 1;
          end
        end else och++;
      end else opg++;
    end
  end
endmodule
