// frce: feature-map reused compute engine (FRCE) for one shallow layer.
//
// The CE receives its input feature map as a channel-first pixel stream
// (one beat = all CIN channels of one location), stores it in a line buffer
// (or, for pointwise layers, a two-pixel input register) and keeps all its
// weights on chip in a weight ROM, so it never touches DRAM. As soon as the
// first complete window is buffered the FSM starts; each window is computed
// against all COUT kernels before the window moves on (fully reused feature
// map scheme), which lets pixels die early and frees line-buffer space for
// the next pixels of the layer before.
//
// Parallelism: Pf = 1 and Pw = PW kernels per cycle (the paper's FRCEs mostly
// use output-channel parallelism only). COUT need not be a multiple of PW:
// the kernel dimension is padded up to G = ceil(COUT/PW) groups (fine-grained
// parallel mechanism) and the padded lanes are discarded when the output
// pixel is assembled. Per output pixel the PE array runs G*T cycles, with
// T = K*K*CIN (STC), K*K (DWC) or CIN (PWC); consecutive steps, groups,
// windows and images are issued back to back with no bubble as long as the
// input window is available and the output can be accepted.
//
// Address encoder / padding: window row/column are computed as oy*S-PAD+ky
// and ox*S-PAD+kx; positions outside the image read as zero from the line
// buffer, so padding is never stored. Stride > 1 layers get one extra line.
//
// Pipeline: issue (buffer/ROM read) -> MAC -> result (2 cycles). Results of
// each group are written into a collect register; the final group moves the
// finished pixel into a 2-entry output FIFO (the output buffer; with Pf = 1 it
// only holds whole pixels). Handshake: valid/ready on both streams.
// Weight ROM word layout (this design's choice): word g*T+t holds the PW
// weights of kernels g*PW..g*PW+PW-1 for step t, step order (ky,kx,ci) with
// ci fastest. The requantisation (shift, optional ReLU) is this design's own.
module frce
  import lwcnn_pkg::*;
#(
  parameter layer_e      TYPE  = LAYER_STC,
  parameter int unsigned H     = 224,  // input height
  parameter int unsigned W     = 224,  // input width
  parameter int unsigned CIN   = 3,
  parameter int unsigned COUT  = 32,   // = CIN for depthwise
  parameter int unsigned K     = 3,
  parameter int unsigned S     = 2,
  parameter int unsigned PAD   = 1,
  parameter int unsigned PW    = 8,
  parameter int unsigned SHIFT = 7,
  parameter bit          RELU  = 1'b1,
  // derived
  parameter int unsigned G     = (COUT + PW - 1) / PW,
  parameter int unsigned T     = (TYPE == LAYER_STC) ? K*K*CIN :
                                 (TYPE == LAYER_DWC) ? K*K : CIN,
  parameter int unsigned WDEPTH = G * T
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // input stream (channel-first)
  input  logic                      in_valid,
  output logic                      in_ready,
  input  data_t [CIN-1:0]           in_pix,
  // output stream (channel-first)
  output logic                      out_valid,
  input  logic                      out_ready,
  output data_t [COUT-1:0]          out_pix,
  // weight ROM load port
  input  logic                      wld_en,
  input  logic [$clog2(WDEPTH)-1:0] wld_addr,
  input  data_t [PW-1:0]            wld_data,
  // status
  output logic                      mac_busy   // PE array doing useful work
);
  localparam bit PWC = (TYPE == LAYER_PWC);
  localparam int unsigned HO = PWC ? H*W : (H + 2*PAD - K) / S + 1;
  localparam int unsigned WO = PWC ? 1   : (W + 2*PAD - K) / S + 1;
  localparam int unsigned IH = PWC ? H*W : H;   // geometry seen by the buffer
  localparam int unsigned IW = PWC ? 1   : W;
  localparam int unsigned KK = PWC ? 1   : K;
  localparam int unsigned SS = PWC ? 1   : S;
  localparam int unsigned PP = PWC ? 0   : PAD;
  localparam int unsigned NL = PWC ? 2   : ((S > 1) ? K + 1 : K);
  localparam int unsigned CW = (TYPE == LAYER_STC || PWC) ? CIN : 1; // ci loop
  localparam int unsigned WAW = $clog2(WDEPTH);

  // ---------------- line buffer ----------------
  logic [31:0]       wr_count, free_idx, img_base;
  logic              rd_en, img_done;
  logic signed [15:0] rd_row, rd_col;
  data_t [CIN-1:0]   rd_pix;

  line_buffer #(.W(IW), .H(IH), .C(CIN), .NL(NL)) u_lb (
    .clk, .rst_n, .in_valid, .in_ready, .in_pix, .wr_count,
    .free_idx, .rd_en, .rd_row, .rd_col, .rd_img_done(img_done), .rd_pix
  );

  // ---------------- weight ROM ----------------
  logic [WAW-1:0]  waddr;
  data_t [PW-1:0]  wdata;
  weight_rom #(.DEPTH(WDEPTH), .PW(PW)) u_rom (
    .clk, .ld_en(wld_en), .ld_addr(wld_addr), .ld_data(wld_data),
    .rd_en, .rd_addr(waddr), .rd_data(wdata)
  );

  // ---------------- FSM / address encoder ----------------
  logic [15:0] oy, ox, ky, kx, ci, g;
  logic signed [15:0] row0, col0;          // window origin (may be negative)
  assign row0 = $signed(16'(oy * SS)) - $signed(16'(PP));
  assign col0 = $signed(16'(ox * SS)) - $signed(16'(PP));

  // window availability: bottom-right pixel of the window has been written
  logic signed [15:0] br_r, br_c;
  logic [31:0] br_idx;
  always_comb begin
    br_r = row0 + $signed(16'(KK - 1));
    br_c = col0 + $signed(16'(KK - 1));
    if (br_r > $signed(16'(IH - 1))) br_r = $signed(16'(IH - 1));
    if (br_c > $signed(16'(IW - 1))) br_c = $signed(16'(IW - 1));
    br_idx = img_base + 32'(br_r) * IW + 32'(br_c);
  end
  logic win_ok;
  assign win_ok = wr_count > br_idx;

  // Oldest pixel still needed by the current or a later window. Pixels left
  // of the window in its top row die only if the next output row no longer
  // reads that row (otherwise the whole top row stays live).
  logic signed [15:0] lo, next_lo;
  always_comb begin
    lo      = (row0 < 0) ? 16'sd0 : row0;
    next_lo = row0 + $signed(16'(SS));
    if (next_lo < 0) next_lo = 16'sd0;
    free_idx = img_base + 32'(lo) * IW;
    if (next_lo > lo || oy == 16'(HO-1))
      free_idx = free_idx + 32'((col0 < 0) ? 16'sd0 : col0);
  end

  logic last_step, last_group, last_pos;
  assign last_step  = (ky == 16'(KK-1)) && (kx == 16'(KK-1)) && (ci == 16'(CW-1));
  assign last_group = (g == 16'(G-1));
  assign last_pos   = (oy == 16'(HO-1)) && (ox == 16'(WO-1));

  // output FIFO occupancy bookkeeping
  logic [1:0] ofifo_cnt;
  logic       fin_pending;
  logic       gate_ok;
  // a pixel's final group may only start when the output FIFO has room
  assign gate_ok = !(last_group && ky == 0 && kx == 0 && ci == 0) ||
                   (32'(ofifo_cnt) + 32'(fin_pending) < 2);

  logic issue;
  assign issue    = win_ok && gate_ok;
  assign rd_en    = issue;
  assign rd_row   = row0 + $signed(ky);
  assign rd_col   = col0 + $signed(kx);
  assign img_done = issue && last_step && last_group && last_pos;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oy <= '0; ox <= '0; ky <= '0; kx <= '0; ci <= '0; g <= '0;
      waddr <= '0; img_base <= '0;
    end else if (issue) begin
      if (!last_step) begin
        waddr <= waddr + 1'b1;
        if (ci != 16'(CW-1)) ci <= ci + 1'b1;
        else begin
          ci <= '0;
          if (kx != 16'(KK-1)) kx <= kx + 1'b1;
          else begin kx <= '0; ky <= ky + 1'b1; end
        end
      end else begin
        ci <= '0; kx <= '0; ky <= '0;
        if (!last_group) begin
          g <= g + 1'b1;
          waddr <= waddr + 1'b1;
        end else begin
          g <= '0;
          waddr <= '0;
          if (ox != 16'(WO-1)) ox <= ox + 1'b1;
          else begin
            ox <= '0;
            if (oy != 16'(HO-1)) oy <= oy + 1'b1;
            else begin
              oy <= '0;
              img_base <= img_base + 32'(IH * IW);
            end
          end
        end
      end
    end
  end

  // ---------------- stage 1: operands ready ----------------
  logic        s1_v, s1_first, s1_last;
  logic [15:0] s1_ci, s1_g;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_ci <= '0; s1_g <= '0;
    end else begin
      s1_v     <= issue;
      s1_first <= (ky == 0) && (kx == 0) && (ci == 0);
      s1_last  <= last_step;
      s1_ci    <= ci;
      s1_g     <= g;
    end
  end

  data_t [0:0]    fm_b;
  data_t [PW-1:0] fm_dw;
  always_comb begin
    fm_b[0] = rd_pix[s1_ci];
    for (int l = 0; l < PW; l++) begin
      int unsigned c;
      c = 32'(s1_g) * PW + l;
      fm_dw[l] = (c < CIN) ? rd_pix[c] : data_t'(0);
    end
  end

  acc_t [0:0][PW-1:0] sums;
  logic               sums_v;
  pe_array #(.PF(1), .PW(PW), .DEPTHWISE(TYPE == LAYER_DWC)) u_pe (
    .clk, .rst_n, .en(s1_v), .first(s1_first), .last(s1_last),
    .fm(fm_b), .fm_dw, .wt(wdata), .sum(sums), .sum_valid(sums_v)
  );
  assign mac_busy = s1_v;

  logic [15:0] s2_g;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s2_g <= '0;
    else if (s1_v && s1_last) s2_g <= s1_g;
  end

  // ---------------- collect register + output FIFO ----------------
  data_t [COUT-1:0] collect, merged;
  always_comb begin
    merged = collect;
    for (int l = 0; l < PW; l++) begin
      int unsigned c;
      c = 32'(s2_g) * PW + l;
      if (c < COUT) merged[c] = requant(sums[0][l], SHIFT, RELU);  // padded lanes dropped
    end
  end

  data_t [1:0][COUT-1:0] ofifo;
  logic rd_ptr, wr_ptr;
  logic push, pop;
  assign push      = sums_v && (s2_g == 16'(G-1));
  assign out_valid = (ofifo_cnt != 0);
  assign pop       = out_valid && out_ready;
  assign out_pix   = ofifo[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      collect <= '0; ofifo <= '0; rd_ptr <= 1'b0; wr_ptr <= 1'b0;
      ofifo_cnt <= '0; fin_pending <= 1'b0;
    end else begin
      if (sums_v) collect <= merged;
      if (push) begin
        ofifo[wr_ptr] <= merged;
        wr_ptr <= ~wr_ptr;
      end
      if (pop) rd_ptr <= ~rd_ptr;
      ofifo_cnt <= ofifo_cnt + 2'(push) - 2'(pop);
      if (issue && last_step && last_group) fin_pending <= 1'b1;
      else if (push)                        fin_pending <= 1'b0;
    end
  end

  // output FIFO must never overflow
  assert property (@(posedge clk) disable iff (!rst_n) !(push && ofifo_cnt == 2 && !pop));
endmodule
