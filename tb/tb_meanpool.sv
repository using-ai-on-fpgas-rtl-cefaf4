// tb_meanpool: self-checking test of global mean pooling. Random maps with
// every node count 0..10 (and 12, which must be clipped to 10) are compared
// with the reference mean; latency n_nodes + 3 is checked on every run.
module tb_meanpool;
  import gnn_pkg::*;
  `include "gnn_ref.svh"

  localparam int NODES = 10, DIM = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [NODE_W-1:0] n_nodes;
  data_t x [NODES][DIM];
  data_t g [DIM];

  meanpool #(.NODES(NODES), .DIM(DIM)) dut (.clk, .rst_n, .start, .n_nodes, .x, .g, .busy, .done);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int nn);
    dyn_t xr, gr;
    int cyc, ne;
    xr = zeros(MAXN * MAXD);
    for (int v = 0; v < NODES; v++)
      for (int d = 0; d < DIM; d++) begin
        xr[v*MAXD + d] = longint'($urandom_range(65535)) - 32768;
        x[v][d] = data_t'(xr[v*MAXD + d]);
      end
    n_nodes = NODE_W'(nn);
    ne = (nn > NODES) ? NODES : nn;
    gr = ref_meanpool(xr, ne, DIM);
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != ne + 3) begin failures++; $display("latency %0d expected %0d", cyc, ne + 3); end
    for (int d = 0; d < DIM; d++) begin
      checks++;
      if (longint'(g[d]) != gr[d]) begin
        failures++;
        $display("mismatch n=%0d d=%0d got %0d exp %0d", nn, d, g[d], gr[d]);
      end
    end
  endtask

  initial begin
    start = 0; n_nodes = '0;
    for (int v = 0; v < NODES; v++) for (int d = 0; d < DIM; d++) x[v][d] = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int rep = 0; rep < 3; rep++)
      for (int nn = 0; nn <= 10; nn++) run(nn);
    run(12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
