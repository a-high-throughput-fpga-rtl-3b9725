// wrce_out_buffer: output buffer of a weight reused CE.
//
// A WRCE produces, per cycle of results, a tile of PF positions x PW output
// channels, and walks over all position groups (pg) of the map before moving
// to the next kernel group. To keep the stream location-first (all positions
// of one channel, then the next channel) the tiles of one kernel group are
// collected here and then replayed channel by channel. One memory word holds
// a whole tile (PF x PW values), so a tile is written in one cycle and a
// position group of one channel is read by selecting one lane of a word.
// The buffer is double-buffered so that the PE array can fill one kernel
// group while the previous one drains.
//
// Write side: wr_en with wr_pg and wr_tile; wr_commit (with wr_nvalid, the
// number of real channels in the group, < PW for the FGPM-padded last group)
// closes the half. Padded kernel lanes and positions >= HW are never sent.
// Read side: out_valid/out_ready stream of PF-position words; out_last marks
// the final word of a group. wr_room = number of free halves (0..2).
//
// From the paper: PF x PW output tiles gathered in an output buffer before
// they go to the next CE; FGPM padded results are discarded on the way out.
// Own choices: double buffering, one tile per memory word, the replay order.
module wrce_out_buffer
  import lwcnn_pkg::*;
#(
  parameter int unsigned HW  = 3136,
  parameter int unsigned PF  = 8,
  parameter int unsigned PW  = 8,
  parameter int unsigned NPG = (HW + PF - 1) / PF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [15:0]               wr_pg,
  input  data_t [PF-1:0][PW-1:0]    wr_tile,
  input  logic                      wr_commit,
  input  logic [15:0]               wr_nvalid,
  output logic [1:0]                wr_room,
  output logic                      out_valid,
  input  logic                      out_ready,
  output data_t [PF-1:0]            out_word,
  output logic                      out_last
);
  localparam int unsigned AW = $clog2(2 * NPG);
  logic [PF*PW*DATA_W-1:0] mem [2 * NPG];

  logic [1:0]  full;
  logic        wr_half, rd_half;
  logic [1:0][15:0] nvalid;
  logic [15:0] rn, rpg;          // read channel lane / position group
  logic        q_v;              // a word is in the output register
  logic [15:0] q_n, q_pg;
  logic        q_last;
  logic [PF*PW*DATA_W-1:0] q_tile;

  assign wr_room = 2'(!full[0]) + 2'(!full[1]);

  always_ff @(posedge clk) begin
    if (wr_en) mem[AW'(32'(wr_half) * NPG + 32'(wr_pg))] <= wr_tile;
  end

  // read pipeline: issue a memory read when the output register is free or
  // being emptied this cycle
  logic issue, last_rd;
  assign issue   = full[rd_half] && (!q_v || out_ready);
  assign last_rd = (rpg == 16'(NPG - 1)) && (rn == nvalid[rd_half] - 1);

  always_ff @(posedge clk) begin
    if (issue) q_tile <= mem[AW'(32'(rd_half) * NPG + 32'(rpg))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wr_half <= 1'b0; rd_half <= 1'b0; nvalid <= '0;
      rn <= '0; rpg <= '0; q_v <= 1'b0; q_n <= '0; q_pg <= '0; q_last <= 1'b0;
    end else begin
      if (wr_commit) begin
        full[wr_half]   <= 1'b1;
        nvalid[wr_half] <= wr_nvalid;
        wr_half         <= ~wr_half;
      end
      if (issue) begin
        q_v <= 1'b1; q_n <= rn; q_pg <= rpg; q_last <= last_rd;
        if (rpg != 16'(NPG - 1)) rpg <= rpg + 1'b1;
        else begin
          rpg <= '0;
          if (last_rd) begin
            rn            <= '0;
            full[rd_half] <= 1'b0;
            rd_half       <= ~rd_half;
          end else begin
            rn <= rn + 1'b1;
          end
        end
      end else if (out_ready) begin
        q_v <= 1'b0;
      end
    end
  end

  assign out_valid = q_v;
  assign out_last  = q_v && q_last;
  always_comb begin
    for (int f = 0; f < PF; f++)
      out_word[f] = (32'(q_pg) * PF + f < HW) ?
                    data_t'(q_tile[(f*PW + 32'(q_n))*DATA_W +: DATA_W]) : data_t'(0);
  end
endmodule
