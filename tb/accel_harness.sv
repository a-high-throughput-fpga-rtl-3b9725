// accel_harness: end-to-end driver and checker for lwcnn_accel.
// It loads the six FRCE weight ROMs, streams NIMG random images in, plays
// the DRAM for both WRCE weight streams (every kernel group once per image),
// applies random backpressure on the result stream and compares every result
// with a layer-by-layer software model (lwcnn_ref_pkg). It also counts how
// often each mechanism of the design occurred and counts a failure for any
// that never did. FULL=1 instantiates the top with its default parameters.
//
// The reference model and the random traffic are this testbench's own; the
// layer list it checks is the slice chosen for the top, not one from the paper.
module accel_harness
  import lwcnn_pkg::*;
  import lwcnn_ref_pkg::*;
#(
  parameter bit FULL = 1'b0,
  parameter int IMG = 16, parameter int C0 = 3, parameter int C1 = 16,
  parameter int C2 = 16, parameter int CX = 32, parameter int C6 = 32,
  parameter int C7 = 24, parameter int NIMG = 2,
  parameter longint MAXCYC = 2000000,
  parameter int LONG_STALL = 20000
) ();
  localparam int H1 = (IMG + 2 - 3) / 2 + 1, H2 = (H1 + 2 - 3) / 2 + 1;
  localparam int HW2 = H2 * H2, NPG = (HW2 + 7) / 8;
  localparam int PWL [6] = '{16, 4, 3, 8, 4, 8};

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic in_valid, in_ready, wld_en, wt6_valid, wt6_ready, wt7_valid, wt7_ready;
  logic out_valid, out_ready, out_last;
  data_t [C0-1:0] in_pix;
  logic [2:0] wld_sel;
  logic [15:0] wld_addr;
  data_t [15:0] wld_data;
  data_t [7:0] out_word;
  data_t [3:0] wt6_data, wt7_data;
  logic [7:0] ce_busy;

  if (FULL) begin : g_dut
    lwcnn_accel dut (.*);
  end else begin : g_dut
    lwcnn_accel #(.IMG_H(IMG), .IMG_W(IMG), .C0(C0), .C1(C1), .C2(C2), .CX(CX),
                  .C6(C6), .C7(C7)) dut (.*);
  end

  int checks = 0, failures = 0;
  iarr_t wts[8], x[NIMG], y[NIMG];

  // ---------------- mechanism counters ----------------
  longint cyc = 0, busy[8];
  int n_in_stall = 0, n_pad = 0, n_img_overlap = 0, n_fgpm = 0, n_sc_add = 0;
  int n_mask = 0, n_gfm_pp = 0, n_wb_pp = 0, n_ob_pp = 0, n_out_stall = 0;
  int sc_max = 0;
  initial foreach (busy[i]) busy[i] = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = 0; i < 8; i++) if (ce_busy[i]) busy[i] <= busy[i] + 1;
    if (in_valid && !in_ready) n_in_stall <= n_in_stall + 1;
    if (g_dut.dut.u_l0.rd_en && g_dut.dut.u_l0.u_lb.pad) n_pad <= n_pad + 1;
    // next image already streaming into L0 while the previous is computed
    if (g_dut.dut.u_l0.u_lb.wr_fire &&
        g_dut.dut.u_l0.wr_count >= g_dut.dut.u_l0.img_base + IMG*IMG)
      n_img_overlap <= n_img_overlap + 1;
    if (g_dut.dut.u_l2.push) n_fgpm <= n_fgpm + 1;       // 18 lanes computed, 16 kept
    if (g_dut.dut.u_scb.pop) n_sc_add <= n_sc_add + 1;
    if (int'(g_dut.dut.u_scb.level) > sc_max) sc_max <= int'(g_dut.dut.u_scb.level);
    if (g_dut.dut.mw6) n_mask <= n_mask + 1;
    if ((g_dut.dut.u_l6.u_gfm.full[g_dut.dut.u_l6.u_gfm.rd_half] && g_dut.dut.sv && g_dut.dut.sr) ||
        (g_dut.dut.u_l7.u_gfm.full[g_dut.dut.u_l7.u_gfm.rd_half] && g_dut.dut.v6 && g_dut.dut.r6))
      n_gfm_pp <= n_gfm_pp + 1;
    if ((wt6_valid && wt6_ready && g_dut.dut.u_l6.u_wb.rd_avail) ||
        (wt7_valid && wt7_ready && g_dut.dut.u_l7.u_wb.rd_avail))
      n_wb_pp <= n_wb_pp + 1;
    if (g_dut.dut.u_l7.u_ob.full == 2'b11 || g_dut.dut.u_l6.u_ob.full == 2'b11) n_ob_pp <= n_ob_pp + 1;
    if (out_valid && !out_ready) n_out_stall <= n_out_stall + 1;
  end

  task automatic need(string name, int n);
    checks++;
    $display("mechanism %-34s : %0d", name, n);
    if (n == 0) begin failures++; $display("  never happened"); end
  endtask

  task automatic finish_report(bit timeout);
    if (timeout) failures++;
    need("input stall (backpressure to DRAM)", n_in_stall);
    need("padding generated by address logic", n_pad);
    need("next image streamed during compute", n_img_overlap);
    need("FGPM padded-lane pixels (L2)", n_fgpm);
    need("shortcut element-wise adds", n_sc_add);
    need("converter masked writes", n_mask);
    need("GFM ping-pong overlap", n_gfm_pp);
    need("weight ping-pong prefetch", n_wb_pp);
    need("output buffer both halves full", n_ob_pp);
    need("result backpressure", n_out_stall);
    $display("shortcut delayed buffer peak occupancy: %0d pixels (%0d lines of %0d)",
             sc_max, sc_max / H2, H2);
    for (int i = 0; i < 8; i++)
      $display("CE L%0d PE-array busy %0d of %0d cycles (%0.1f%%)", i, busy[i], cyc,
               100.0 * busy[i] / cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (MAXCYC) @(posedge clk);
    $display("watchdog expired at cycle %0d", cyc);
    finish_report(1);
  end

  // layer shapes: type, h, w, cin, cout, k, s, pad, shift, relu
  localparam int LT [6] = '{0, 1, 2, 2, 1, 2};
  localparam int LH [6] = '{IMG, H1, H2, H2, H2, H2};
  localparam int LCI[6] = '{C0, C1, C1, C2, CX, CX};
  localparam int LCO[6] = '{C1, C1, C2, CX, CX, C2};
  localparam int LK [6] = '{3, 3, 1, 1, 3, 1};
  localparam int LS [6] = '{2, 2, 1, 1, 1, 1};
  localparam int LP [6] = '{1, 1, 0, 0, 1, 0};
  localparam int LSH[6] = '{8, 6, 7, 7, 6, 8};
  localparam bit LRL[6] = '{1, 1, 0, 1, 1, 0};

  initial begin
    in_valid = 0; wld_en = 0; wld_sel = 0; wld_addr = 0; wld_data = '0; in_pix = '0;
    wt6_valid = 0; wt7_valid = 0; wt6_data = '0; wt7_data = '0; out_ready = 0;
    for (int l = 0; l < 6; l++)
      wts[l] = rand_arr((LT[l] == 0) ? LCO[l]*9*LCI[l] : (LT[l] == 1) ? LCO[l]*9 : LCO[l]*LCI[l], -20, 20);
    wts[6] = rand_arr(C6*C2, -25, 25);
    wts[7] = rand_arr(C7*C6, -25, 25);
    for (int i = 0; i < NIMG; i++) begin
      iarr_t a, b;
      x[i] = rand_arr(IMG*IMG*C0, -60, 100);
      a = x[i];
      for (int l = 0; l < 6; l++) begin
        a = conv(LT[l], LH[l], LH[l], LCI[l], LCO[l], LK[l], LS[l], LP[l], LSH[l], LRL[l], a, wts[l]);
        if (l == 2) b = a;
      end
      a = add_sat_arr(a, b);
      a = conv(2, H2, H2, C2, C6, 1, 1, 0, 7, 1, a, wts[6]);
      y[i] = conv(2, H2, H2, C6, C7, 1, 1, 0, 8, 0, a, wts[7]);
    end
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load the FRCE weight ROMs
    for (int l = 0; l < 6; l++) begin
      int tl, wd;
      tl = (LT[l] == 0) ? 9*LCI[l] : (LT[l] == 1) ? 9 : LCI[l];
      wd = ((LCO[l] + PWL[l] - 1) / PWL[l]) * tl;
      for (int a = 0; a < wd; a++) begin
        @(negedge clk);
        wld_en = 1; wld_sel = 3'(l); wld_addr = 16'(a);
        for (int n = 0; n < 16; n++)
          wld_data[n] = (n < PWL[l]) ? data_t'(frce_rom(LT[l], LCI[l], LCO[l], LK[l], PWL[l], a, n, wts[l])) : data_t'(0);
      end
    end
    @(negedge clk); wld_en = 0;
    fork
      begin : img_drive
        for (int i = 0; i < NIMG; i++)
          for (int p = 0; p < IMG*IMG; p++) begin
            @(negedge clk);
            in_valid = 1;
            for (int c = 0; c < C0; c++) in_pix[c] = data_t'(x[i][p*C0+c]);
            #1;
            while (!in_ready) begin @(negedge clk); #1; end
            @(posedge clk); #1;
            in_valid = 0;
          end
      end
      begin : dram6
        for (int i = 0; i < NIMG; i++)
          for (int g = 0; g < (C6 + 3) / 4; g++)
            for (int c = 0; c < C2; c++) begin
              @(negedge clk);
              wt6_valid = 1;
              for (int l = 0; l < 4; l++)
                wt6_data[l] = (g*4+l < C6) ? data_t'(wts[6][(g*4+l)*C2+c]) : data_t'(0);
              #1;
              while (!wt6_ready) begin @(negedge clk); #1; end
              @(posedge clk); #1;
              wt6_valid = 0;
            end
      end
      begin : dram7
        for (int i = 0; i < NIMG; i++)
          for (int g = 0; g < (C7 + 3) / 4; g++)
            for (int c = 0; c < C6; c++) begin
              @(negedge clk);
              wt7_valid = 1;
              for (int l = 0; l < 4; l++)
                wt7_data[l] = (g*4+l < C7) ? data_t'(wts[7][(g*4+l)*C6+c]) : data_t'(0);
              #1;
              while (!wt7_ready) begin @(negedge clk); #1; end
              @(posedge clk); #1;
              wt7_valid = 0;
            end
      end
      begin : result
        // a long DRAM-write stall at the first result fills the WRCE output
        // buffers and lets the next image catch up into the ping-pong halves
        wait (out_valid);
        repeat (LONG_STALL) @(posedge clk);
        for (int i = 0; i < NIMG; i++)
          for (int n = 0; n < C7; n++)
            for (int q = 0; q < NPG; q++) begin
              forever begin
                @(negedge clk);
                out_ready = ($urandom_range(3) != 0);
                #1;
                if (out_valid && out_ready) break;
              end
              for (int f = 0; f < 8; f++) begin
                int p;
                p = q*8 + f;
                if (p >= HW2) continue;
                checks++;
                if (int'(out_word[f]) != y[i][p*C7+n]) begin
                  failures++;
                  if (failures < 10) $display("result mismatch img %0d ch %0d pos %0d: got %0d exp %0d",
                                              i, n, p, int'(out_word[f]), y[i][p*C7+n]);
                end
              end
              @(posedge clk); #1;
              out_ready = 0;
            end
      end
    join
    $display("%0d image(s) of %0dx%0d done in %0d cycles", NIMG, IMG, IMG, cyc);
    finish_report(0);
  end
endmodule
