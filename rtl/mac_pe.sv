// mac_pe: one processing element of a CE's PE array - a signed 8x8 multiplier
// followed by an accumulator, as drawn in the paper's CE structure.
//
// The PE accumulates the partial sums of one whole kernel (KxKxM for a
// standard convolution, KxK for depthwise, M for pointwise) and then presents
// the final sum. Timing: the product of the operands presented with en=1 is
// added on the next clock edge. `first` marks the first term of a kernel: the
// accumulator is loaded with the product instead of adding to the old sum.
// `last` marks the final term: one cycle later `sum` holds the finished kernel
// sum and `sum_valid` pulses for one cycle. A new kernel may start in the cycle
// right after `last`, so the PE never idles between kernels.
// The multiplier is registered-free (combinational into the accumulator); the
// split of first/last flags is this design's own interface choice.
module mac_pe
  import lwcnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,       // operands valid this cycle
  input  logic  first,    // first term of a kernel
  input  logic  last,     // last term of a kernel
  input  data_t fm,       // feature-map operand (broadcast along a column)
  input  data_t wt,       // weight operand (broadcast along a row)
  output acc_t  sum,      // accumulator value
  output logic  sum_valid // sum is a completed kernel result
);
  acc_t prod;
  assign prod = acc_t'(fm) * acc_t'(wt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum       <= '0;
      sum_valid <= 1'b0;
    end else begin
      sum_valid <= en && last;
      if (en) sum <= first ? prod : sum + prod;
    end
  end
endmodule
