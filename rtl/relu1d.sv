// relu1d: element-wise ReLU over a feature vector, the activation between the
// layers of the MLP head. Purely combinational: y[c] = max(x[c], 0).
module relu1d
  import gnn_pkg::*;
#(
  parameter int COLS = MLP_D1
) (
  input  data_t x [COLS],
  output data_t y [COLS]
);
  always_comb begin
    for (int c = 0; c < COLS; c++)
      y[c] = x[c][DATA_W-1] ? '0 : x[c];
  end
endmodule
