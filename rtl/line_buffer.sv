// line_buffer: the feature-map line buffer of a feature-map reused CE (FRCE).
//
// Pixels arrive in channel-first order: one beat carries all C channels of
// one pixel location, locations in raster order, images back to back. The
// buffer holds NL lines of W pixels in a circular store (row slot = global
// input row mod NL). It implements the paper's fully reused feature-map
// scheme: a stored pixel is overwritten as soon as the CE's controller
// declares it dead (all windows that use it have been computed), which the
// controller signals with `free_idx`, the global index of the oldest pixel
// still needed. A write is accepted while the slot it lands on holds a dead
// pixel: in_ready = wr_count < free_idx + NL*W. So a KxK layer keeps about
// K-1 lines plus K-1 pixels live and can overlap with the layer before it.
//
// Padding is never written into the buffer (dataflow-oriented line buffer
// scheme): the read port returns zero for any row/column outside the image,
// so padding costs no write bandwidth and creates no window bubbles at image
// switches. For strided layers the owner sets NL = K+1 (the extra line of the
// paper's scheme) so the next row can be filled while the current one is read.
//
// Read port: rd_row/rd_col are signed coordinates inside the image currently
// read; data appears on rd_pix one cycle after rd_en. rd_img_done advances the
// read side to the next image. wr_count counts all pixels ever written (global
// index), so the controller can test window availability across images.
// Storage organisation (one word per pixel location holding all channels) is
// this design's choice; the paper draws one bank per location column.
module line_buffer
  import lwcnn_pkg::*;
#(
  parameter int unsigned W  = 112,  // image width (pixels)
  parameter int unsigned H  = 112,  // image height (rows)
  parameter int unsigned C  = 32,   // channels per pixel
  parameter int unsigned NL = 3     // stored lines (K, or K+1 for stride > 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // write side: channel-first pixel stream
  input  logic              in_valid,
  output logic              in_ready,
  input  data_t [C-1:0]     in_pix,
  output logic [31:0]       wr_count,
  // lifetime information from the controller
  input  logic [31:0]       free_idx,
  // read side
  input  logic              rd_en,
  input  logic signed [15:0] rd_row,
  input  logic signed [15:0] rd_col,
  input  logic              rd_img_done,
  output data_t [C-1:0]     rd_pix
);
  localparam int unsigned DEPTH = NL * W;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned SW    = $clog2(NL) + 1;

  logic [C*DATA_W-1:0] mem [DEPTH];

  logic [15:0]   wcol;
  logic [SW-1:0] wslot;     // row slot being written
  logic [SW-1:0] rbase;     // row slot of row 0 of the image being read
  logic          wr_fire;

  assign in_ready = (wr_count < free_idx + 32'(DEPTH));
  assign wr_fire  = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (wr_fire) mem[AW'(wslot * W + wcol)] <= in_pix;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcol     <= '0;
      wslot    <= '0;
      wr_count <= '0;
    end else if (wr_fire) begin
      wr_count <= wr_count + 1;
      if (wcol == 16'(W - 1)) begin
        wcol  <= '0;
        wslot <= (wslot == SW'(NL - 1)) ? '0 : wslot + 1'b1;
      end else begin
        wcol <= wcol + 1'b1;
      end
    end
  end

  // Read side: address encoder with padding generator.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rbase <= '0;
    else if (rd_img_done) rbase <= SW'((32'(rbase) + H) % NL);
  end

  logic          pad;
  logic [SW-1:0] rslot;
  assign pad   = rd_row < 0 || rd_row >= 16'(H) || rd_col < 0 || rd_col >= 16'(W);
  assign rslot = SW'((32'(rbase) + 32'(unsigned'(rd_row[14:0]))) % NL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_pix <= '0;
    else if (rd_en) begin
      if (pad) rd_pix <= '0;
      else     rd_pix <= mem[AW'(rslot * W + 32'(unsigned'(rd_col[14:0])))];
    end
  end
endmodule
