// dnn_relu: rectified linear unit, y = x if x > 0, else 0.
//
// As in the paper's ReLU detail: a comparator tests x > 0 and a two-input
// multiplexer passes x or the constant 0. Purely combinational.
module dnn_relu
  import lsdnn_pkg::*;
(
  input  fx_t x,
  output fx_t y
);

  logic pos;

  assign pos = (x > 0);
  assign y   = pos ? x : '0;

endmodule
