// tb_l2_norm: self-checking test of the per-node l2 normalisation. Random
// rows of widely varying magnitude, an all-zero row and single-element rows
// are compared with an integer reference (exact sum of squares, floor square
// root, floor(2^30/norm), product shifted by 20 and saturated). The latency
// NODES * (SQ_BITS + 33) + 2 is checked.
module tb_l2_norm;
  import gnn_pkg::*;
  `include "gnn_ref.svh"

  localparam int NODES = 4, DIM = 8;
  localparam int SS_W0 = 2 * DATA_W + $clog2(DIM + 1);
  localparam int SQ_BITS = (SS_W0 + (SS_W0 % 2)) / 2;
  localparam int LAT = NODES * (SQ_BITS + 33) + 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  data_t x [NODES][DIM];
  data_t y [NODES][DIM];

  l2_norm #(.NODES(NODES), .DIM(DIM)) dut (.clk, .rst_n, .start, .x, .y, .busy, .done);

  int checks = 0, failures = 0, zero_rows = 0, unit_hits = 0;


  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int mode);
    int cyc;
    for (int v = 0; v < NODES; v++) begin
      int mag;
      mag = (mode == 0) ? 32767 : (1 << $urandom_range(4, 14));
      for (int d = 0; d < DIM; d++) x[v][d] = data_t'(longint'($urandom_range(2 * mag)) - longint'(mag));
    end
    if (mode == 1) for (int d = 0; d < DIM; d++) x[0][d] = '0;
    if (mode == 2) begin
      for (int d = 0; d < DIM; d++) x[1][d] = '0;
      x[1][3] = -16'sd700;
    end
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != LAT) begin failures++; $display("latency %0d expected %0d", cyc, LAT); end
    for (int v = 0; v < NODES; v++) begin
      longint ss, nrm, rc;
      ss = 0;
      for (int d = 0; d < DIM; d++) ss += longint'(x[v][d]) * longint'(x[v][d]);
      nrm = isqrt(ss);
      rc = (nrm == 0) ? 0 : (longint'(1) << 30) / nrm;
      if (nrm == 0) zero_rows++;
      for (int d = 0; d < DIM; d++) begin
        longint e;
        e = (nrm == 0) ? 0 : rsat((longint'(x[v][d]) * rc) >>> 20);
        if (e == -1024 || e == 1024) unit_hits++;
        checks++;
        if (longint'(y[v][d]) != e) begin
          failures++;
          $display("mismatch v=%0d d=%0d x=%0d got %0d exp %0d", v, d, x[v][d], y[v][d], e);
        end
      end
    end
  endtask

  initial begin
    start = 0;
    for (int v = 0; v < NODES; v++) for (int d = 0; d < DIM; d++) x[v][d] = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    run(0); run(1); run(2);
    for (int t = 0; t < 20; t++) run(3);
    checks++;
    if (zero_rows == 0 || unit_hits == 0) begin
      failures++; $display("cases not reached: zero=%0d unit=%0d", zero_rows, unit_hits);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
