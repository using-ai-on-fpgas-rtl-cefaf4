// tb_message_passing: self-checking test of the edge-list mean aggregation.
// Random graphs with random node counts, including edges to absent nodes
// (must be skipped), self edges, repeated edges, isolated nodes and the full
// 45-edge list, are compared row by row with the reference model. The
// start-to-done latency n_edges + 3 is checked on every run.
module tb_message_passing;
  import gnn_pkg::*;
  `include "gnn_ref.svh"

  localparam int NODES = 10, DIM = 8, MAXE_P = 45;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [NODE_W-1:0] n_nodes;
  logic [EDGE_CNT_W-1:0] n_edges;
  edge_t edges [MAXE_P];
  data_t h [NODES][DIM];
  data_t agg [NODES][DIM];

  message_passing #(.NODES(NODES), .DIM(DIM), .MAXE(MAXE_P)) dut (
    .clk, .rst_n, .start, .n_nodes, .n_edges, .edges, .h, .agg, .busy, .done);

  int checks = 0, failures = 0;
  int n_isolated = 0, n_skipped = 0, n_self = 0, n_full = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int nn, input int ne, input int mode);
    dyn_t hr, ar;
    elist_t ea, eb;
    int cyc;
    int degc [NODES];
    for (int v = 0; v < NODES; v++) degc[v] = 0;
    hr = zeros(MAXN * MAXD);
    for (int v = 0; v < NODES; v++)
      for (int d = 0; d < DIM; d++) begin
        hr[v*MAXD + d] = longint'($urandom_range(65535)) - 32768;
        h[v][d]  = data_t'(hr[v*MAXD + d]);
      end
    for (int e = 0; e < MAXE_P; e++) begin
      if (mode == 1) begin
        // all pairs of a full graph, in order
        int k = 0;
        for (int a = 0; a < NODES; a++)
          for (int b = a + 1; b < NODES; b++) begin
            if (k == e) begin ea[e] = a; eb[e] = b; end
            k++;
          end
      end else begin
        ea[e] = $urandom_range(11);
        eb[e] = $urandom_range(11);
      end
      edges[e].a = NODE_W'(ea[e]);
      edges[e].b = NODE_W'(eb[e]);
      if (e < ne) begin
        if (ea[e] >= nn || eb[e] >= nn) n_skipped++;
        else begin
          if (ea[e] == eb[e]) n_self++;
          degc[ea[e]]++; degc[eb[e]]++;
        end
      end
    end
    for (int v = 0; v < nn; v++) if (degc[v] == 0) n_isolated++;
    if (ne == 45 && mode == 1) n_full++;
    n_nodes = NODE_W'(nn);
    n_edges = EDGE_CNT_W'(ne);
    ar = ref_mp(hr, nn, ne, ea, eb, DIM);
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != ne + 3) begin failures++; $display("latency %0d expected %0d", cyc, ne + 3); end
    for (int v = 0; v < NODES; v++)
      for (int d = 0; d < DIM; d++) begin
        checks++;
        if (longint'(agg[v][d]) != ar[v*MAXD + d]) begin
          failures++;
          $display("mismatch v=%0d d=%0d got %0d exp %0d", v, d, agg[v][d], ar[v*MAXD + d]);
        end
      end
  endtask

  initial begin
    start = 0; n_nodes = '0; n_edges = '0;
    for (int e = 0; e < MAXE_P; e++) edges[e] = '0;
    for (int v = 0; v < NODES; v++) for (int d = 0; d < DIM; d++) h[v][d] = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    run(10, 45, 1);
    run(10, 0, 0);
    for (int t = 0; t < 30; t++) run($urandom_range(10), $urandom_range(45), 0);
    checks++;
    if (n_isolated == 0 || n_skipped == 0 || n_self == 0 || n_full == 0) begin
      failures++;
      $display("case not reached: isolated=%0d skipped=%0d self=%0d full=%0d",
               n_isolated, n_skipped, n_self, n_full);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
