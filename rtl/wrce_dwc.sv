// wrce_dwc: weight reused compute engine for a deep depthwise layer.
//
// Behind the group boundary feature maps travel location-first: all
// positions of channel 0, then channel 1, and so on, PF positions per beat.
// A depthwise layer needs no sum across channels, so a WRCE only has to keep
// the single channel it is working on. This CE holds one channel plane
// (H x W bytes) in a ping-pong pair of register planes: the next channel
// arrives in one plane while the PE column computes on the other. The K x K
// kernel of each channel comes from DRAM into a ping-pong weight buffer, so
// every weight is read from DRAM exactly once per image.
//
// Compute: for each output position group opg (PF outputs) and each kernel
// tap t = (ky, kx), PE f multiplies the input pixel under tap t of output
// position opg*PF+f by weight t. Taps outside the map read zero (padding is
// produced by the addressing, never stored). After K*K cycles the PF sums
// are requantised and leave as one location-first output word, so the
// output needs no reordering. Cycles per channel: ceil(HO*WO/PF) * K*K.
//
// Interfaces (valid/ready): in_word = PF positions of one channel, words of
// a channel in order, ceil(H*W/PF) words per channel, C channels per image;
// wt_data = K*K weights per channel in (ky, kx) order; out_word = PF output
// positions of one channel, out_last on the last word of each channel.
// Lanes past the end of a plane are ignored on input and zero on output.
//
// From the paper: deep DWC layers on a WRCE keep only single-channel FM
// lines, and weights are fetched from DRAM once. Own choices: the whole
// (small) channel plane is kept rather than a few lines, the plane is a
// register array so PF arbitrary taps can be read per cycle, the two-entry
// output FIFO, and the shift/ReLU requantisation. C (channels per image)
// needs no counter, since every channel is handled alike; it documents the
// layer. The module is not part of the lwcnn_accel slice, whose deep layers
// are pointwise.
module wrce_dwc
  import lwcnn_pkg::*;
#(
  parameter int unsigned C     = 32,
  parameter int unsigned H     = 14,
  parameter int unsigned W     = 14,
  parameter int unsigned K     = 3,
  parameter int unsigned S     = 1,
  parameter int unsigned PAD   = 1,
  parameter int unsigned PF    = 8,
  parameter int unsigned SHIFT = 6,
  parameter bit          RELU  = 1'b1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  data_t [PF-1:0] in_word,
  input  logic           wt_valid,
  output logic           wt_ready,
  input  data_t          wt_data,
  output logic           out_valid,
  input  logic           out_ready,
  output data_t [PF-1:0] out_word,
  output logic           out_last,
  output logic           mac_busy
);
  localparam int unsigned HW   = H * W;
  localparam int unsigned HO   = (H + 2 * PAD - K) / S + 1;
  localparam int unsigned WO   = (W + 2 * PAD - K) / S + 1;
  localparam int unsigned HWO  = HO * WO;
  localparam int unsigned NPGI = (HW + PF - 1) / PF;
  localparam int unsigned NPGO = (HWO + PF - 1) / PF;
  localparam int unsigned KK   = K * K;

  // ---------------- channel planes (ping-pong) ----------------
  data_t       plane [2][HW];
  logic [1:0]  full;
  logic        wh, rh;
  logic [15:0] wpg;
  logic        in_fire, rel;

  assign in_ready = !full[wh];
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (in_fire)
      for (int f = 0; f < PF; f++)
        if (32'(wpg) * PF + 32'(f) < HW) plane[wh][32'(wpg) * PF + 32'(f)] <= in_word[f];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wpg <= '0; wh <= 1'b0; rh <= 1'b0; full <= '0;
    end else begin
      if (in_fire) begin
        if (32'(wpg) == NPGI - 1) begin
          wpg <= '0; wh <= ~wh; full[wh] <= 1'b1;
        end else wpg <= wpg + 16'd1;
      end
      if (rel) begin
        full[rh] <= 1'b0; rh <= ~rh;
      end
    end
  end

  // ---------------- weights ----------------
  logic  wb_avail, wb_rel, rd_en;
  data_t wt_q;
  logic [15:0] rd_addr;
  weight_buffer #(.CIN(KK), .PW(1)) u_wb (
    .clk, .rst_n, .wt_valid, .wt_ready, .wt_data,
    .rd_avail(wb_avail), .rd_release(wb_rel), .rd_en, .rd_addr, .rd_data(wt_q)
  );

  // ---------------- schedule ----------------
  logic [15:0] opg, ky, kx;
  logic [15:0] boy, box;          // output coordinates of lane 0 of opg
  logic [1:0]  ocnt, pend;
  logic        first_t, last_t, last_opg, issue, push, pop;

  assign first_t  = (ky == 0) && (kx == 0);
  assign last_t   = (32'(ky) == K - 1) && (32'(kx) == K - 1);
  assign last_opg = (32'(opg) == NPGO - 1);
  assign issue    = full[rh] && wb_avail && (!first_t || (32'(ocnt) + 32'(pend) < 2));
  assign rel      = issue && last_t && last_opg;
  assign wb_rel   = rel;
  assign rd_en    = issue;
  assign rd_addr  = 16'(32'(ky) * K + 32'(kx));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      opg <= '0; ky <= '0; kx <= '0; boy <= '0; box <= '0;
    end else if (issue) begin
      if (32'(kx) != K - 1) kx <= kx + 16'd1;
      else begin
        kx <= '0;
        if (32'(ky) != K - 1) ky <= ky + 16'd1;
        else begin
          ky <= '0;
          if (last_opg) begin
            opg <= '0; boy <= '0; box <= '0;
          end else begin
            opg <= opg + 16'd1;
            // advance lane 0 by PF positions (PF may exceed WO)
            boy <= 16'((32'(boy) * WO + 32'(box) + PF) / WO);
            box <= 16'((32'(boy) * WO + 32'(box) + PF) % WO);
          end
        end
      end
    end
  end

  // operand fetch: tap (ky, kx) of every lane, zero outside the map
  data_t [PF-1:0] fm_c;
  logic  [PF-1:0] lane_ok;
  always_comb begin
    int oy, ox, r, c;
    oy = int'(boy); ox = int'(box);
    for (int f = 0; f < PF; f++) begin
      lane_ok[f] = (32'(opg) * PF + 32'(f)) < HWO;
      r = oy * int'(S) - int'(PAD) + int'(ky);
      c = ox * int'(S) - int'(PAD) + int'(kx);
      if (lane_ok[f] && r >= 0 && r < int'(H) && c >= 0 && c < int'(W))
        fm_c[f] = plane[rh][r * int'(W) + c];
      else
        fm_c[f] = '0;
      ox = ox + 1;
      if (ox == int'(WO)) begin ox = 0; oy = oy + 1; end
    end
  end

  logic           s1_v, s1_first, s1_last, s1_end;
  logic  [PF-1:0] s1_ok;
  data_t [PF-1:0] s1_fm;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_end <= 1'b0;
      s1_ok <= '0; s1_fm <= '0;
    end else begin
      s1_v     <= issue;
      s1_first <= first_t;
      s1_last  <= last_t;
      s1_end   <= last_t && last_opg;
      s1_ok    <= lane_ok;
      s1_fm    <= fm_c;
    end
  end

  acc_t [PF-1:0][0:0] sums;
  logic               sums_v;
  pe_array #(.PF(PF), .PW(1), .DEPTHWISE(1'b0)) u_pe (
    .clk, .rst_n, .en(s1_v), .first(s1_first), .last(s1_last),
    .fm(s1_fm), .fm_dw('0), .wt(wt_q), .sum(sums), .sum_valid(sums_v)
  );
  assign mac_busy = s1_v;

  // flags that travel with the sums (set with the last tap)
  logic          s2_end;
  logic [PF-1:0] s2_ok;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_end <= 1'b0; s2_ok <= '0;
    end else if (s1_v && s1_last) begin
      s2_end <= s1_end; s2_ok <= s1_ok;
    end
  end

  // ---------------- output FIFO (2 entries) ----------------
  data_t [PF-1:0] q_word [2];
  logic           q_last [2];
  logic           q_rd, q_wr;
  data_t [PF-1:0] rq_word;

  always_comb
    for (int f = 0; f < PF; f++)
      rq_word[f] = s2_ok[f] ? requant(sums[f][0], SHIFT, RELU) : '0;

  assign push      = sums_v;
  assign out_valid = (ocnt != 0);
  assign pop       = out_valid && out_ready;
  assign out_word  = q_word[q_rd];
  assign out_last  = q_last[q_rd];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ocnt <= '0; pend <= '0; q_rd <= 1'b0; q_wr <= 1'b0;
      q_word[0] <= '0; q_word[1] <= '0; q_last[0] <= 1'b0; q_last[1] <= 1'b0;
    end else begin
      if (push) begin
        q_word[q_wr] <= rq_word; q_last[q_wr] <= s2_end; q_wr <= ~q_wr;
      end
      if (pop) q_rd <= ~q_rd;
      ocnt <= ocnt + 2'(push) - 2'(pop);
      pend <= pend + 2'(issue && first_t) - 2'(push);
    end
  end
endmodule
