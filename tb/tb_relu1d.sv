// tb_relu1d: checks the 1D ReLU on random vectors, with the extreme values
// -32768, -1, 0, 1 and 32767 forced into every vector.
module tb_relu1d;
  import gnn_pkg::*;
  localparam int COLS = 64;
  data_t x [COLS];
  data_t y [COLS];
  int checks = 0, failures = 0, neg = 0;

  relu1d #(.COLS(COLS)) dut (.x, .y);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int c = 0; c < COLS; c++) x[c] = data_t'($urandom);
      x[0] = -16'sd32768; x[1] = -16'sd1; x[2] = 16'sd0; x[3] = 16'sd1; x[4] = 16'sd32767;
      #1;
      for (int c = 0; c < COLS; c++) begin
        int exp_v;
        exp_v = (int'(x[c]) < 0) ? 0 : int'(x[c]);
        if (int'(x[c]) < 0) neg++;
        checks++;
        if (int'(y[c]) != exp_v) begin
          failures++;
          $display("mismatch c=%0d x=%0d y=%0d", c, x[c], y[c]);
        end
      end
    end
    checks++;
    if (neg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
