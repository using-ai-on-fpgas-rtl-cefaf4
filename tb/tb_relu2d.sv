// tb_relu2d: checks the 2D ReLU on random feature maps, with the extreme
// values -32768, -1, 0, 1 and 32767 forced into every map.
module tb_relu2d;
  import gnn_pkg::*;
  localparam int ROWS = 10, COLS = 16;
  data_t x [ROWS][COLS];
  data_t y [ROWS][COLS];
  int checks = 0, failures = 0, neg = 0;

  relu2d #(.ROWS(ROWS), .COLS(COLS)) dut (.x, .y);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) x[r][c] = data_t'($urandom);
      x[0][0] = -16'sd32768; x[1][1] = -16'sd1; x[2][2] = 16'sd0; x[3][3] = 16'sd1;
      x[4][4] = 16'sd32767;
      #1;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          int exp_v;
          exp_v = (int'(x[r][c]) < 0) ? 0 : int'(x[r][c]);
          if (int'(x[r][c]) < 0) neg++;
          checks++;
          if (int'(y[r][c]) != exp_v) begin
            failures++;
            $display("mismatch r=%0d c=%0d x=%0d y=%0d", r, c, x[r][c], y[r][c]);
          end
        end
    end
    checks++;
    if (neg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
