// relu2d: element-wise ReLU over a ROWS x COLS feature map (one row per graph
// node), the activation that closes each SAGE layer. Purely combinational:
// y[r][c] = max(x[r][c], 0).
module relu2d
  import gnn_pkg::*;
#(
  parameter int ROWS = MAX_NODES,
  parameter int COLS = H2
) (
  input  data_t x [ROWS][COLS],
  output data_t y [ROWS][COLS]
);
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        y[r][c] = x[r][c][DATA_W-1] ? '0 : x[r][c];
  end
endmodule
