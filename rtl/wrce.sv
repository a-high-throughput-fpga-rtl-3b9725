// wrce: weight reused compute engine (WRCE) for one deep pointwise layer,
// also used as the fully connected CE on a 1x1 feature map.
//
// Deep layers have small feature maps and many weights, so a WRCE keeps the
// whole input map on chip (ping-pong global FM buffer) and streams its
// weights from DRAM exactly once per image: a group of PW kernels is loaded
// into the ping-pong weight buffer and applied to every position of the map
// before the next group is used (fully reused weight scheme). Parallelism is
// PF positions x PW kernels; WRCEs prefer PF so one tile covers a wide slice
// of the output map. COUT need not be a multiple of PW: the last group is
// padded (fine-grained parallel mechanism) and its extra lanes are dropped in
// the output buffer.
//
// Schedule per image: for each kernel group g, for each position group pg,
// for ci = 0..CIN-1: PE(f,w) += x[ci][pg*PF+f] * w[g*PW+w][ci]. That is
// G*NPG*CIN cycles per image with no bubble between tiles or groups while the
// next weight group and output half are ready. Tiles go to the output buffer,
// which re-emits them location-first (channel by channel).
//
// With CONVERTER=1 the GFM buffer accepts the channel-first pixel stream of
// the last FRCE and transposes it (dataflow order converter); otherwise the
// input is the location-first word stream of the previous WRCE.
// Interfaces: valid/ready streams for FM input, DRAM weights and output. The
// shift/ReLU requantisation is this design's own choice. mask_write (high
// during converter writes) is a status output; it is constant 0 when
// CONVERTER = 0.
//
// From the paper: whole-map FM buffer, DRAM weights read once, Pf x Pw array,
// converter at the group boundary. Own choices: the g/pg/ci loop order, the
// requantisation. Deep DWC layers use wrce_dwc. Not built: WRCEs for STC
// layers and off-chip shortcuts.
module wrce
  import lwcnn_pkg::*;
#(
  parameter int unsigned CIN       = 16,
  parameter int unsigned COUT      = 32,
  parameter int unsigned H         = 56,
  parameter int unsigned W         = 56,
  parameter int unsigned PF        = 8,
  parameter int unsigned PW        = 4,
  parameter int unsigned NB        = 2,
  parameter bit          CONVERTER = 1'b0,
  parameter int unsigned SHIFT     = 7,
  parameter bit          RELU      = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  // feature-map input
  input  logic            in_valid,
  output logic            in_ready,
  input  data_t [CIN-1:0] in_pix,    // CONVERTER = 1
  input  data_t [PF-1:0]  in_word,   // CONVERTER = 0
  // weights from DRAM (CIN words of PW weights per kernel group)
  input  logic            wt_valid,
  output logic            wt_ready,
  input  data_t [PW-1:0]  wt_data,
  // location-first output
  output logic            out_valid,
  input  logic            out_ready,
  output data_t [PF-1:0]  out_word,
  output logic            out_last,  // last word of a kernel group
  // status
  output logic            mac_busy,
  output logic            mask_write
);
  localparam int unsigned HW  = H * W;
  localparam int unsigned NPG = (HW + PF - 1) / PF;
  localparam int unsigned G   = (COUT + PW - 1) / PW;

  logic gfm_avail, gfm_release, wb_avail, wb_release, rd_en;
  logic [15:0] ci, pg, g;
  data_t [PF-1:0] fm_word;
  data_t [PW-1:0] w_word;

  gfm_buffer #(.C(CIN), .HW(HW), .PF(PF), .NB(NB), .CONVERTER(CONVERTER)) u_gfm (
    .clk, .rst_n, .in_valid, .in_ready, .in_pix, .in_word,
    .rd_avail(gfm_avail), .rd_release(gfm_release), .rd_en,
    .rd_ch(ci), .rd_pg(pg), .rd_word(fm_word), .mask_write
  );

  weight_buffer #(.CIN(CIN), .PW(PW)) u_wb (
    .clk, .rst_n, .wt_valid, .wt_ready, .wt_data,
    .rd_avail(wb_avail), .rd_release(wb_release), .rd_en,
    .rd_addr(ci), .rd_data(w_word)
  );

  // ---- controller ----
  logic [1:0] room;
  logic [1:0] pend;           // kernel groups issued but not yet committed
  logic start_ok, issue, last_ci, last_pg, last_g, group_start;
  assign last_ci     = (ci == 16'(CIN - 1));
  assign last_pg     = (pg == 16'(NPG - 1));
  assign last_g      = (g == 16'(G - 1));
  assign group_start = (ci == 0) && (pg == 0);
  // a new kernel group needs its weights and a free output-buffer half
  assign start_ok    = !group_start || (32'(room) > 32'(pend));
  assign issue       = gfm_avail && wb_avail && start_ok;
  assign rd_en       = issue;
  assign wb_release  = issue && last_ci && last_pg;
  assign gfm_release = wb_release && last_g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ci <= '0; pg <= '0; g <= '0;
    end else if (issue) begin
      if (!last_ci) ci <= ci + 1'b1;
      else begin
        ci <= '0;
        if (!last_pg) pg <= pg + 1'b1;
        else begin
          pg <= '0;
          g  <= last_g ? '0 : g + 1'b1;
        end
      end
    end
  end

  // stage 1: operands available
  logic s1_v, s1_first, s1_last, s1_endgrp;
  logic [15:0] s1_pg, s1_g;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_endgrp <= 1'b0;
      s1_pg <= '0; s1_g <= '0;
    end else begin
      s1_v      <= issue;
      s1_first  <= (ci == 0);
      s1_last   <= last_ci;
      s1_endgrp <= last_ci && last_pg;
      s1_pg     <= pg;
      s1_g      <= g;
    end
  end

  acc_t [PF-1:0][PW-1:0] sums;
  logic sums_v;
  pe_array #(.PF(PF), .PW(PW), .DEPTHWISE(1'b0)) u_pe (
    .clk, .rst_n, .en(s1_v), .first(s1_first), .last(s1_last),
    .fm(fm_word), .fm_dw('0), .wt(w_word), .sum(sums), .sum_valid(sums_v)
  );
  assign mac_busy = s1_v;

  // stage 2: results -> output buffer
  logic [15:0] s2_pg, s2_g;
  logic        s2_endgrp;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_pg <= '0; s2_g <= '0; s2_endgrp <= 1'b0;
    end else if (s1_v && s1_last) begin
      s2_pg <= s1_pg; s2_g <= s1_g; s2_endgrp <= s1_endgrp;
    end
  end

  data_t [PF-1:0][PW-1:0] tile;
  always_comb begin
    for (int f = 0; f < PF; f++)
      for (int l = 0; l < PW; l++)
        tile[f][l] = requant(sums[f][l], SHIFT, RELU);
  end

  logic commit;
  assign commit = sums_v && s2_endgrp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pend <= '0;
    else pend <= pend + 2'(issue && group_start) - 2'(commit);
  end

  wrce_out_buffer #(.HW(HW), .PF(PF), .PW(PW)) u_ob (
    .clk, .rst_n, .wr_en(sums_v), .wr_pg(s2_pg), .wr_tile(tile),
    .wr_commit(commit),
    .wr_nvalid((32'(s2_g) == G - 1) ? 16'(COUT - (G - 1) * PW) : 16'(PW)),
    .wr_room(room), .out_valid, .out_ready, .out_word, .out_last
  );
endmodule
