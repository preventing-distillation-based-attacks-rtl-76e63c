// nn_pkg: types and constants shared by the MLP classifier and its poisoning stage.
//
// Every activation, score and prediction is a 16-bit signed fixed-point word with
// FRAC_BITS fractional bits (the common ap_fixed<16,6> format of hls4ml-generated
// networks; the 16-bit width is the unobfuscated width of scores and predictions,
// the 6 integer bits are this design's choice). Weights and biases use the same format.
//
// poison_e selects the single defence a build carries. The defences are static:
// each is a different circuit, chosen by a parameter, never switched at run time.
package nn_pkg;

  localparam int unsigned DATA_W    = 16;
  localparam int unsigned FRAC_BITS = 10;

  typedef logic signed [DATA_W-1:0] data_t;

  // Defence applied around SoftMax.
  //   POISON_NONE : plain classifier
  //   POISON_ST   : score truncation, before SoftMax
  //   POISON_PT   : prediction truncation, after SoftMax
  //   POISON_TOP1 : only the largest prediction is passed, the others read zero
  //   POISON_TOP3 : only the three largest predictions are passed
  typedef enum logic [2:0] {
    POISON_NONE = 3'd0,
    POISON_ST   = 3'd1,
    POISON_PT   = 3'd2,
    POISON_TOP1 = 3'd3,
    POISON_TOP3 = 3'd4
  } poison_e;

  // One write into the weight or bias memory of a dense layer.
  //   layer  : which dense layer (0 = first)
  //   bias   : 1 writes bias[neuron], 0 writes weight[neuron][input]
  //   neuron : output-neuron index
  //   input  : input index (ignored for a bias)
  typedef struct packed {
    logic        en;
    logic [3:0]  layer;
    logic        bias;
    logic [11:0] neuron;
    logic [11:0] input_idx;
    data_t       data;
  } wload_t;

  // Saturate a wide signed value to the 16-bit data range.
  function automatic data_t sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return data_t'(16'sh7fff);
    else if (v < -64'sd32768) return data_t'(16'sh8000);
    else                      return data_t'(v[15:0]);
  endfunction

endpackage
