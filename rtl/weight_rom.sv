// weight_rom: on-chip weight store of a feature-map reused CE (FRCE).
//
// FRCEs keep all weights of their (shallow) layer on chip, so the weight ROM
// is read continuously and never refilled from DRAM during inference. One
// word holds the PW weights broadcast to the PW kernel rows of the PE array
// in one cycle. Word ordering is decided by the CE's address encoder.
// Timing: synchronous read, data on rd_data one cycle after rd_en.
// The paper's ROM would be initialised with the bitstream; here a write port
// (ld_en/ld_addr/ld_data) loads it before inference, which is this design's
// own choice so that any network can be loaded without data files.
module weight_rom
  import lwcnn_pkg::*;
#(
  parameter int unsigned DEPTH = 216,  // words
  parameter int unsigned PW    = 8     // weights per word
) (
  input  logic                     clk,
  input  logic                     ld_en,
  input  logic [$clog2(DEPTH)-1:0] ld_addr,
  input  data_t [PW-1:0]           ld_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output data_t [PW-1:0]           rd_data
);
  logic [PW*DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ld_en) mem[ld_addr] <= ld_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
