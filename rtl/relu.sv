// relu: element-wise rectifier applied to the outputs of every hidden dense layer.
//
// dout[i] = din[i] when din[i] is positive, otherwise 0. Purely combinational, so it
// adds no clock cycle. The placement after each hidden fully-connected layer follows
// the layer sequences of the evaluated networks; the vector form is this design's.
module relu
  import nn_pkg::*;
#(
  parameter int unsigned N = 100
) (
  input  data_t din  [N],
  output data_t dout [N]
);
  always_comb begin
    for (int i = 0; i < N; i++)
      dout[i] = din[i][DATA_W-1] ? '0 : din[i];
  end
endmodule
