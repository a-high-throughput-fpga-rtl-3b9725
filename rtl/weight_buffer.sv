// weight_buffer: ping-pong weight buffer of a weight reused CE (WRCE).
//
// The weights of PW kernels (one "kernel group", CIN words of PW weights, one
// word per input channel) are streamed in from DRAM while the PE array works
// on the previous group from the other half, hiding the DRAM latency. Because
// each group is then applied to the whole feature map, every weight is read
// from DRAM exactly once per image (fully reused weight scheme).
// Handshake: wt_valid/wt_ready per word; a half becomes readable (rd_avail)
// after its CIN-th word, and rd_release returns it to the loader. Reads:
// rd_data one cycle after rd_en.
//
// From the paper: ping-pong weight buffers in WRCEs, weights read from DRAM once.
// Own choices: one kernel group per half, the word layout, the release handshake.
module weight_buffer
  import lwcnn_pkg::*;
#(
  parameter int unsigned CIN = 16,
  parameter int unsigned PW  = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wt_valid,
  output logic           wt_ready,
  input  data_t [PW-1:0] wt_data,
  output logic           rd_avail,
  input  logic           rd_release,
  input  logic           rd_en,
  input  logic [15:0]    rd_addr,
  output data_t [PW-1:0] rd_data
);
  localparam int unsigned AW = $clog2(2 * CIN);
  logic [PW*DATA_W-1:0] mem [2 * CIN];
  logic [1:0]  full;
  logic        wr_half, rd_half;
  logic [15:0] waddr;

  assign wt_ready = !full[wr_half];
  assign rd_avail = full[rd_half];

  always_ff @(posedge clk) begin
    if (wt_valid && wt_ready) mem[AW'(32'(wr_half) * CIN + 32'(waddr))] <= wt_data;
    if (rd_en) rd_data <= mem[AW'(32'(rd_half) * CIN + 32'(rd_addr))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wr_half <= 1'b0; rd_half <= 1'b0; waddr <= '0;
    end else begin
      if (wt_valid && wt_ready) begin
        if (waddr == 16'(CIN - 1)) begin
          waddr         <= '0;
          full[wr_half] <= 1'b1;
          wr_half       <= ~wr_half;
        end else begin
          waddr <= waddr + 1'b1;
        end
      end
      if (rd_release) begin
        full[rd_half] <= 1'b0;
        rd_half       <= ~rd_half;
      end
    end
  end
endmodule
