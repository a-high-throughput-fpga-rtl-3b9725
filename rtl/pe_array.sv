// pe_array: the PF x PW grid of mac_pe units of one compute engine.
//
// Following the paper's CE structure, input feature-map values are broadcast
// vertically and weights horizontally: PE (f,w) multiplies FM operand f by
// weight operand w, so PF feature positions are processed against PW kernels
// in the same cycle (parallelism across FM, Pf, and across kernels, Pw).
// For depthwise layers (DEPTHWISE=1) there is no cross-channel sum and each
// kernel row works on its own channel, so row w takes its own FM operand
// fm_dw[w] instead of the broadcast one; PF is then 1.
// Timing: one multiply-accumulate per PE per cycle; control flags as in
// mac_pe, results valid one cycle after `last`.
//
// From the paper: the broadcast directions and the Pf x Pw shape. Own choice:
// the per-row operand port for depthwise layers.
module pe_array
  import lwcnn_pkg::*;
#(
  parameter int unsigned PF        = 1,  // parallelism across FM positions
  parameter int unsigned PW        = 8,  // parallelism across kernels
  parameter bit          DEPTHWISE = 1'b0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          first,
  input  logic          last,
  input  data_t [PF-1:0] fm,     // broadcast FM operands, one per column
  input  data_t [PW-1:0] fm_dw,  // per-row FM operands (depthwise only)
  input  data_t [PW-1:0] wt,     // weight operands, one per row
  output acc_t  [PF-1:0][PW-1:0] sum,
  output logic          sum_valid
);
  logic [PF-1:0][PW-1:0] v;

  for (genvar f = 0; f < PF; f++) begin : g_col
    for (genvar w = 0; w < PW; w++) begin : g_row
      data_t a;
      assign a = DEPTHWISE ? fm_dw[w] : fm[f];
      mac_pe u_pe (
        .clk, .rst_n, .en, .first, .last,
        .fm(a), .wt(wt[w]), .sum(sum[f][w]), .sum_valid(v[f][w])
      );
    end
  end

  assign sum_valid = v[0][0];
endmodule
