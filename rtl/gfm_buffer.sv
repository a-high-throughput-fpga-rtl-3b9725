// gfm_buffer: ping-pong global feature-map buffer of a weight reused CE
// (WRCE), optionally acting as the dataflow order converter.
//
// A WRCE applies every kernel it loads from DRAM to the whole input feature
// map, so the map (C channels x HW positions) is stored entirely, twice: one
// half is filled by the upstream CE while the PE array reads the other. Data
// leave the buffer location-first: one read returns PF consecutive positions
// of one channel (a "position group", pg), which the PE array broadcasts over
// its PF columns.
//
// Storage is split into NB banks. Channel c lives in bank c % NB at word
// (c / NB) * NPG + pg of the active half, NPG = ceil(HW/PF). Every word has a
// per-lane (byte) write mask.
//
// CONVERTER = 0: input is already location-first; each beat (in_word) holds
// one position group of one channel, channels in order, and is written whole.
// CONVERTER = 1: input is a channel-first pixel stream from the FRCE group
// (in_pix, all C channels of one location). A pixel is serialised NB channels
// per cycle; channel c is written to bank c % NB with only lane (pos % PF)
// enabled. After HW pixels every channel's data sit location-first, so the
// transpose needs no storage beyond the buffer itself. This follows the
// paper's converter figure (two banks, masked writes, even channels in one
// bank, odd in the other, read width = positions per word).
//
// Handshake: in_valid/in_ready per beat (converter: ready in the last
// serialisation cycle of a pixel). rd_avail says a full half is ready to be
// read; rd_release hands it back. Reads: data one cycle after rd_en.
//
// From the paper: a ping-pong buffer holding the whole map, and the masked bank
// writes of the converter. Own choices: the address map and the rd_release handshake.
module gfm_buffer
  import lwcnn_pkg::*;
#(
  parameter int unsigned C         = 16,
  parameter int unsigned HW        = 3136,
  parameter int unsigned PF        = 8,
  parameter int unsigned NB        = 2,
  parameter bit          CONVERTER = 1'b1,
  parameter int unsigned NPG       = (HW + PF - 1) / PF,
  parameter int unsigned CPB       = (C + NB - 1) / NB,    // channels per bank
  parameter int unsigned BDEPTH    = 2 * CPB * NPG
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  data_t [C-1:0]     in_pix,    // converter mode
  input  data_t [PF-1:0]    in_word,   // location-first mode
  output logic              rd_avail,
  input  logic              rd_release,
  input  logic              rd_en,
  input  logic [15:0]       rd_ch,
  input  logic [15:0]       rd_pg,
  output data_t [PF-1:0]    rd_word,
  output logic              mask_write   // a masked (partial) write happened
);
  localparam int unsigned AW = $clog2(BDEPTH);
  localparam int unsigned SER = CONVERTER ? CPB : 1;

  logic [1:0] full;
  logic       wr_half, rd_half;
  logic [15:0] pos, ch, sc;   // write position / channel / serialiser step

  // ---- bank write controls ----
  logic [NB-1:0]            bwe;
  logic [NB-1:0][AW-1:0]    baddr;
  logic [NB-1:0][PF-1:0]    bmask;
  data_t [NB-1:0][PF-1:0]   bdata;

  logic can_write, last_beat;
  assign can_write = !full[wr_half];
  assign in_ready  = can_write && (sc == 16'(SER - 1));

  always_comb begin
    bwe = '0; baddr = '0; bmask = '0; bdata = '0;
    if (CONVERTER) begin
      for (int b = 0; b < NB; b++) begin
        int unsigned c;
        c = 32'(sc) * NB + b;
        bwe[b]   = in_valid && can_write && (c < C);
        baddr[b] = AW'(32'(wr_half) * CPB * NPG + 32'(sc) * NPG + 32'(pos) / PF);
        for (int l = 0; l < PF; l++) begin
          bmask[b][l] = (32'(pos) % PF == l);
          bdata[b][l] = (c < C) ? in_pix[c] : data_t'(0);
        end
      end
    end else begin
      for (int b = 0; b < NB; b++) begin
        bwe[b]   = in_valid && can_write && (32'(ch) % NB == b);
        baddr[b] = AW'(32'(wr_half) * CPB * NPG + (32'(ch) / NB) * NPG + 32'(pos));
        bmask[b] = '1;
        bdata[b] = in_word;
      end
    end
  end

  assign mask_write = CONVERTER && (|bwe);

  // last beat of a whole feature map
  assign last_beat = CONVERTER ? (pos == 16'(HW - 1)) && (sc == 16'(SER - 1))
                               : (ch == 16'(C - 1)) && (pos == 16'(NPG - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos <= '0; ch <= '0; sc <= '0; wr_half <= 1'b0;
    end else if (in_valid && can_write) begin
      if (CONVERTER) begin
        if (sc != 16'(SER - 1)) sc <= sc + 1'b1;
        else begin
          sc  <= '0;
          pos <= (pos == 16'(HW - 1)) ? '0 : pos + 1'b1;
        end
      end else begin
        if (pos != 16'(NPG - 1)) pos <= pos + 1'b1;
        else begin
          pos <= '0;
          ch  <= (ch == 16'(C - 1)) ? '0 : ch + 1'b1;
        end
      end
      if (last_beat) wr_half <= ~wr_half;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; rd_half <= 1'b0;
    end else begin
      if (in_valid && can_write && last_beat) full[wr_half] <= 1'b1;
      if (rd_release) begin
        full[rd_half] <= 1'b0;
        rd_half       <= ~rd_half;
      end
    end
  end
  assign rd_avail = full[rd_half];

  // ---- banks ----
  data_t [NB-1:0][PF-1:0] bq;
  logic [AW-1:0] raddr;
  assign raddr = AW'(32'(rd_half) * CPB * NPG + (32'(rd_ch) / NB) * NPG + 32'(rd_pg));

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [PF*DATA_W-1:0] mem [BDEPTH];
    always_ff @(posedge clk) begin
      for (int l = 0; l < PF; l++)
        if (bwe[b] && bmask[b][l]) mem[baddr[b]][l*DATA_W +: DATA_W] <= bdata[b][l];
      if (rd_en) bq[b] <= mem[raddr];
    end
  end

  logic [15:0] rsel;
  always_ff @(posedge clk) if (rd_en) rsel <= 16'(32'(rd_ch) % NB);
  assign rd_word = bq[rsel];
endmodule
