// lwcnn_pkg: types and helpers shared by the compute engines (CEs) of the
// streaming lightweight-CNN accelerator.
//
// Activations and weights are signed 8-bit, as in the evaluated networks.
// Partial sums are kept in ACC_W-bit accumulators. When a CE emits a result it
// is requantised back to 8 bits by an arithmetic right shift, an optional
// ReLU and saturation; the shift/ReLU requantisation is this design's own
// choice (the paper only states 8-bit quantisation).
package lwcnn_pkg;

  localparam int unsigned DATA_W = 8;   // activation / weight width
  localparam int unsigned ACC_W  = 32;  // accumulator width

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Layer type of a compute engine.
  typedef enum logic [1:0] {
    LAYER_STC = 2'd0,   // standard KxK convolution
    LAYER_DWC = 2'd1,   // depthwise KxK convolution
    LAYER_PWC = 2'd2,   // pointwise 1x1 convolution
    LAYER_FC  = 2'd3    // fully connected (flattened input)
  } layer_e;

  // Saturate a wide signed value to the 8-bit activation range.
  function automatic data_t sat8(input logic signed [ACC_W:0] v);
    if (v > 127)       return data_t'(127);
    else if (v < -128) return data_t'(-128);
    else               return data_t'(v[DATA_W-1:0]);
  endfunction

  // Requantise an accumulator: arithmetic shift, optional ReLU, saturation.
  function automatic data_t requant(input acc_t acc, input int unsigned shift,
                                    input bit relu);
    acc_t s;
    s = acc >>> shift;
    if (relu && s < 0) s = '0;
    return sat8({s[ACC_W-1], s});
  endfunction

  // Saturating element-wise add used by the shortcut of a skip-connection block.
  function automatic data_t add_sat(input data_t a, input data_t b);
    return sat8({{(ACC_W-DATA_W+1){a[DATA_W-1]}}, a} + {{(ACC_W-DATA_W+1){b[DATA_W-1]}}, b});
  endfunction

endpackage
