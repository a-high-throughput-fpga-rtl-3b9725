// scb_shortcut: shortcut path of a skip-connection block (SCB) inside the
// FRCE group.
//
// The SCB input stream is copied ("stream copy"): one copy feeds the main
// branch (the block's convolution CEs, outside this module), the other enters
// a delayed buffer - a FIFO of DEPTH pixels - so no shortcut data travels to
// DRAM. When the main branch returns a result pixel, it is added element-wise
// (saturating) to the oldest pixel of the delayed buffer and sent on. With
// fully reused feature maps the main branch lags its input by only about two
// image lines, so DEPTH defaults to two lines of the block's feature map; a
// DEPTH below the branch latency would deadlock the block.
// Streams are channel-first pixels, valid/ready. The copy is accepted only
// when both the branch and the FIFO can take it. The FIFO is a register
// array with combinational read (this design's choice). br_pix is in_pix
// itself: the stream copy is a wire, only the handshake is joined.
//
// From the paper: stream copy, delayed buffer of about two lines, element-wise
// operation. Own choices: saturating add, the FIFO form and its exact depth.
module scb_shortcut
  import lwcnn_pkg::*;
#(
  parameter int unsigned C     = 16,
  parameter int unsigned W     = 56,
  parameter int unsigned DEPTH = 2 * W
) (
  input  logic          clk,
  input  logic          rst_n,
  // SCB input
  input  logic          in_valid,
  output logic          in_ready,
  input  data_t [C-1:0] in_pix,
  // copy to the main branch
  output logic          br_valid,
  input  logic          br_ready,
  output data_t [C-1:0] br_pix,
  // result of the main branch
  input  logic          res_valid,
  output logic          res_ready,
  input  data_t [C-1:0] res_pix,
  // SCB output
  output logic          out_valid,
  input  logic          out_ready,
  output data_t [C-1:0] out_pix,
  output logic [$clog2(DEPTH+1)-1:0] level   // delayed-buffer occupancy
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [C*DATA_W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic full, empty, push, pop;

  assign full  = (32'(level) == DEPTH);
  assign empty = (level == '0);

  assign br_valid  = in_valid && !full;
  assign in_ready  = br_ready && !full;
  assign br_pix    = in_pix;
  assign push      = in_valid && in_ready;

  assign out_valid = res_valid && !empty;
  assign res_ready = out_ready && !empty;
  assign pop       = out_valid && out_ready;

  data_t [C-1:0] sc_pix;
  assign sc_pix = mem[rp];
  always_comb begin
    for (int c = 0; c < C; c++) out_pix[c] = add_sat(res_pix[c], sc_pix[c]);
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_pix;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      if (push) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      level <= level + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end
endmodule
