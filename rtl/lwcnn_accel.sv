// lwcnn_accel: streaming lightweight-CNN accelerator with hybrid compute
// engines - a representative network slice wired as in the paper's
// architecture figure.
//
// Every layer has its own compute engine and feature maps flow from CE to CE
// on chip; only the input image, the WRCE weights and the result touch DRAM.
// Shallow layers run on feature-map reused CEs (FRCE: weights on chip,
// channel-first pixel stream, line buffers); deep layers run on weight reused
// CEs (WRCE: whole map on chip in a ping-pong buffer, weights streamed once
// per image from DRAM, location-first stream). The first WRCE after the group
// boundary converts the dataflow order.
//
// Layers (defaults; input 224x224x3, 8-bit):
//   L0 FRCE STC 3x3/2 pad 1, 3->C1            224 -> 112   Pw 16
//   L1 FRCE DWC 3x3/2 pad 1, C1               112 -> 56    Pw 4
//   L2 FRCE PWC 1x1, C1->C2 (linear)           56           Pw 3 (padded)
//   SCB on 56x56xC2 with an FRCE delayed shortcut buffer of two lines:
//     L3 FRCE PWC C2->CX, L4 FRCE DWC 3x3/1 pad 1 CX, L5 FRCE PWC CX->C2
//     (linear), then element-wise add with the shortcut; Pw 8, 4, 8
//   ---- group boundary ----
//   L6 WRCE PWC C2->C6, converter (channel-first -> location-first)  Pf 8 Pw 4
//   L7 WRCE PWC C6->C7                                                Pf 8 Pw 4
// The paper gives the architecture but not the per-layer configuration of
// its MobileNetV2/ShuffleNetV2 builds, so this layer list, the channel
// counts, the parallelism and the requantisation shifts are this design's
// own choices; the full networks are obtained by chaining more of the same
// CEs with parameters from the allocation algorithms.
//
// Ports: image input (channel-first pixels), FRCE weight-ROM load port
// (wld_sel picks the layer 0..5, lanes above that layer's Pw are ignored),
// one DRAM weight stream per WRCE, and the location-first result stream
// (PF positions of one channel per beat). All streams are valid/ready.
// wld_addr is 16 bits wide; each layer uses the low bits its ROM needs.
// sc_level, l6 and the mask_write flags are internal status kept for
// observation; they drive no logic.
module lwcnn_accel
  import lwcnn_pkg::*;
#(
  parameter int unsigned IMG_H = 224,
  parameter int unsigned IMG_W = 224,
  parameter int unsigned C0    = 3,    // input image channels
  parameter int unsigned C1    = 16,
  parameter int unsigned C2    = 16,
  parameter int unsigned CX    = 32,   // SCB expansion channels
  parameter int unsigned C6    = 32,
  parameter int unsigned C7    = 24,
  // derived sizes
  parameter int unsigned H1 = (IMG_H + 2 - 3) / 2 + 1,
  parameter int unsigned W1 = (IMG_W + 2 - 3) / 2 + 1,
  parameter int unsigned H2 = (H1 + 2 - 3) / 2 + 1,
  parameter int unsigned W2 = (W1 + 2 - 3) / 2 + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // input image from DRAM
  input  logic            in_valid,
  output logic            in_ready,
  input  data_t [C0-1:0]  in_pix,
  // FRCE weight ROM load
  input  logic            wld_en,
  input  logic [2:0]      wld_sel,
  input  logic [15:0]     wld_addr,
  input  data_t [15:0]    wld_data,
  // WRCE weights from DRAM
  input  logic            wt6_valid,
  output logic            wt6_ready,
  input  data_t [3:0]     wt6_data,
  input  logic            wt7_valid,
  output logic            wt7_ready,
  input  data_t [3:0]     wt7_data,
  // result to DRAM (location-first)
  output logic            out_valid,
  input  logic            out_ready,
  output data_t [7:0]     out_word,
  output logic            out_last,
  // per-CE activity (PE array doing useful work), for efficiency counters
  output logic [7:0]      ce_busy
);
  // Per-CE parallelism, balanced by hand the way the paper's parallelism
  // tuning does it: each CE gets the fewest lanes that keep its cycles per
  // image (FRCE: G*T per output pixel; WRCE: G*NPG*CIN) at or below those
  // of L0, which with Pf 1 cannot go below 27 cycles per output pixel. At
  // the defaults: L0 338688, L1 112896, L2 301056, L3 200704, L4 225792,
  // L5 200704, L6 50176, L7 75264 cycles per image. PW2 = 3 does not divide
  // 16 kernels: the last group is padded (FGPM).
  localparam int unsigned PW0 = 16, PW1 = 4, PW2 = 3, PW3 = 8, PW4 = 4, PW5 = 8;
  localparam int unsigned PF6 = 8, PW6 = 4, PF7 = 8, PW7 = 4;

  // per-layer ROM address widths
  localparam int unsigned WD0 = ((C1 + PW0 - 1) / PW0) * 9 * C0;
  localparam int unsigned WD1 = ((C1 + PW1 - 1) / PW1) * 9;
  localparam int unsigned WD2 = ((C2 + PW2 - 1) / PW2) * C1;
  localparam int unsigned WD3 = ((CX + PW3 - 1) / PW3) * C2;
  localparam int unsigned WD4 = ((CX + PW4 - 1) / PW4) * 9;
  localparam int unsigned WD5 = ((C2 + PW5 - 1) / PW5) * CX;

  logic [5:0] ld;
  for (genvar i = 0; i < 6; i++) begin : g_ld
    assign ld[i] = wld_en && (wld_sel == 3'(i));
  end

  // ---------------- FRCE group ----------------
  logic v0, r0, v1, r1, v2, r2;
  data_t [C1-1:0] p0, p1;
  data_t [C2-1:0] p2;

  frce #(.TYPE(LAYER_STC), .H(IMG_H), .W(IMG_W), .CIN(C0), .COUT(C1), .K(3), .S(2),
         .PAD(1), .PW(PW0), .SHIFT(8), .RELU(1'b1)) u_l0 (
    .clk, .rst_n, .in_valid, .in_ready, .in_pix,
    .out_valid(v0), .out_ready(r0), .out_pix(p0),
    .wld_en(ld[0]), .wld_addr(wld_addr[$clog2(WD0)-1:0]), .wld_data(wld_data[PW0-1:0]),
    .mac_busy(ce_busy[0])
  );

  frce #(.TYPE(LAYER_DWC), .H(H1), .W(W1), .CIN(C1), .COUT(C1), .K(3), .S(2),
         .PAD(1), .PW(PW1), .SHIFT(6), .RELU(1'b1)) u_l1 (
    .clk, .rst_n, .in_valid(v0), .in_ready(r0), .in_pix(p0),
    .out_valid(v1), .out_ready(r1), .out_pix(p1),
    .wld_en(ld[1]), .wld_addr(wld_addr[$clog2(WD1)-1:0]), .wld_data(wld_data[PW1-1:0]),
    .mac_busy(ce_busy[1])
  );

  frce #(.TYPE(LAYER_PWC), .H(H2), .W(W2), .CIN(C1), .COUT(C2), .K(1), .S(1),
         .PAD(0), .PW(PW2), .SHIFT(7), .RELU(1'b0)) u_l2 (
    .clk, .rst_n, .in_valid(v1), .in_ready(r1), .in_pix(p1),
    .out_valid(v2), .out_ready(r2), .out_pix(p2),
    .wld_en(ld[2]), .wld_addr(wld_addr[$clog2(WD2)-1:0]), .wld_data(wld_data[PW2-1:0]),
    .mac_busy(ce_busy[2])
  );

  // ---------------- skip-connection block ----------------
  logic bv, br, v3, r3, v4, r4, v5, r5, sv, sr;
  data_t [C2-1:0] bp, p5, sp;
  data_t [CX-1:0] p3, p4;
  logic [$clog2(2*W2+1)-1:0] sc_level;

  scb_shortcut #(.C(C2), .W(W2), .DEPTH(2 * W2)) u_scb (
    .clk, .rst_n,
    .in_valid(v2), .in_ready(r2), .in_pix(p2),
    .br_valid(bv), .br_ready(br), .br_pix(bp),
    .res_valid(v5), .res_ready(r5), .res_pix(p5),
    .out_valid(sv), .out_ready(sr), .out_pix(sp),
    .level(sc_level)
  );

  frce #(.TYPE(LAYER_PWC), .H(H2), .W(W2), .CIN(C2), .COUT(CX), .K(1), .S(1),
         .PAD(0), .PW(PW3), .SHIFT(7), .RELU(1'b1)) u_l3 (
    .clk, .rst_n, .in_valid(bv), .in_ready(br), .in_pix(bp),
    .out_valid(v3), .out_ready(r3), .out_pix(p3),
    .wld_en(ld[3]), .wld_addr(wld_addr[$clog2(WD3)-1:0]), .wld_data(wld_data[PW3-1:0]),
    .mac_busy(ce_busy[3])
  );

  frce #(.TYPE(LAYER_DWC), .H(H2), .W(W2), .CIN(CX), .COUT(CX), .K(3), .S(1),
         .PAD(1), .PW(PW4), .SHIFT(6), .RELU(1'b1)) u_l4 (
    .clk, .rst_n, .in_valid(v3), .in_ready(r3), .in_pix(p3),
    .out_valid(v4), .out_ready(r4), .out_pix(p4),
    .wld_en(ld[4]), .wld_addr(wld_addr[$clog2(WD4)-1:0]), .wld_data(wld_data[PW4-1:0]),
    .mac_busy(ce_busy[4])
  );

  frce #(.TYPE(LAYER_PWC), .H(H2), .W(W2), .CIN(CX), .COUT(C2), .K(1), .S(1),
         .PAD(0), .PW(PW5), .SHIFT(8), .RELU(1'b0)) u_l5 (
    .clk, .rst_n, .in_valid(v4), .in_ready(r4), .in_pix(p4),
    .out_valid(v5), .out_ready(r5), .out_pix(p5),
    .wld_en(ld[5]), .wld_addr(wld_addr[$clog2(WD5)-1:0]), .wld_data(wld_data[PW5-1:0]),
    .mac_busy(ce_busy[5])
  );

  // ---------------- WRCE group ----------------
  logic v6, r6, l6, mw6, mw7;   // l6/mw*: observed by testbenches only
  data_t [PF6-1:0] w6;

  wrce #(.CIN(C2), .COUT(C6), .H(H2), .W(W2), .PF(PF6), .PW(PW6), .NB(2),
         .CONVERTER(1'b1), .SHIFT(7), .RELU(1'b1)) u_l6 (
    .clk, .rst_n, .in_valid(sv), .in_ready(sr), .in_pix(sp), .in_word('0),
    .wt_valid(wt6_valid), .wt_ready(wt6_ready), .wt_data(wt6_data),
    .out_valid(v6), .out_ready(r6), .out_word(w6), .out_last(l6),
    .mac_busy(ce_busy[6]), .mask_write(mw6)
  );

  wrce #(.CIN(C6), .COUT(C7), .H(H2), .W(W2), .PF(PF7), .PW(PW7), .NB(2),
         .CONVERTER(1'b0), .SHIFT(8), .RELU(1'b0)) u_l7 (
    .clk, .rst_n, .in_valid(v6), .in_ready(r6), .in_pix('0), .in_word(w6),
    .wt_valid(wt7_valid), .wt_ready(wt7_ready), .wt_data(wt7_data),
    .out_valid, .out_ready, .out_word, .out_last,
    .mac_busy(ce_busy[7]), .mask_write(mw7)
  );
endmodule
