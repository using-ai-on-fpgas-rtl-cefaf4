// tb_sage_layer: self-checking test of one GraphSAGE layer. Loads random root,
// neighbour and projection weights through the load bus (ids of layer 2),
// runs random graphs of random size and edge lists, and compares every node
// row of the output with the reference model (root + mean of neighbour
// projections, projection, ReLU). Also checks the latency
// Lx + E + Lp + 7 and that ReLU clipping was exercised. A second instance
// with NORMALIZE set (l2 normalisation after combination) runs on the same
// inputs and weights and is checked against the normalising reference, with
// the extra l2_norm latency.
module tb_sage_layer;
  import gnn_pkg::*;
  `include "gnn_ref.svh"

  localparam int NODES = 10, MAXE_P = 45, DIN = 5, DOUT = 12, OUT_PAR = 5, LAYER = 2;
  localparam int NG = (DOUT + OUT_PAR - 1) / OUT_PAR;
  localparam int LX = NG * DIN + 1, LP = NG * DOUT + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  wload_t wload;
  logic start, busy, done;
  logic [NODE_W-1:0] n_nodes;
  logic [EDGE_CNT_W-1:0] n_edges;
  edge_t edges [MAXE_P];
  data_t x [NODES][DIN];
  data_t y [NODES][DOUT];
  data_t yn [NODES][DOUT];
  logic busy_n, done_n;
  localparam int SS_W0 = 2 * DATA_W + $clog2(DOUT + 1);
  localparam int L2LAT = NODES * ((SS_W0 + (SS_W0 % 2)) / 2 + 33) + 2;

  sage_layer #(.NODES(NODES), .MAXE(MAXE_P), .DIN(DIN), .DOUT(DOUT), .OUT_PAR(OUT_PAR),
               .LAYER(LAYER)) dut (
    .clk, .rst_n, .wload, .start, .n_nodes, .n_edges, .edges, .x, .y, .busy, .done);

  sage_layer #(.NODES(NODES), .MAXE(MAXE_P), .DIN(DIN), .DOUT(DOUT), .OUT_PAR(OUT_PAR),
               .LAYER(LAYER), .NORMALIZE(1'b1)) dut_n (
    .clk, .rst_n, .wload, .start, .n_nodes, .n_edges, .edges, .x, .y(yn), .busy(busy_n),
    .done(done_n));

  int checks = 0, failures = 0, n_zero = 0, n_pos = 0;
  dyn_t wr, wn, wp, br, bn, bp;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_unit(input int id, input int din, input int dout,
                           input dyn_t w, input dyn_t b);
    for (int o = 0; o < dout; o++)
      for (int i = 0; i < din; i++) begin
        wload.en = 1; wload.id = WID_W'(id); wload.addr = WADDR_W'(o * din + i);
        wload.data = data_t'(w[o*MAXD + i]);
        @(posedge clk); #1;
      end
    for (int o = 0; o < dout; o++) begin
      wload.en = 1; wload.id = WID_W'(id); wload.addr = WADDR_W'(dout * din + o);
      wload.data = data_t'(b[o]);
      @(posedge clk); #1;
    end
    wload.en = 0;
  endtask

  task automatic run(input int nn, input int ne);
    dyn_t xr, yr, ynr;
    elist_t ea, eb;
    int cyc;
    xr = zeros(MAXN * MAXD);
    for (int v = 0; v < NODES; v++)
      for (int i = 0; i < DIN; i++) begin
        xr[v*MAXD + i] = longint'($urandom_range(4096)) - 2048;
        x[v][i] = data_t'(xr[v*MAXD + i]);
      end
    for (int e = 0; e < MAXE_P; e++) begin
      ea[e] = $urandom_range(9); eb[e] = $urandom_range(9);
      edges[e].a = NODE_W'(ea[e]); edges[e].b = NODE_W'(eb[e]);
    end
    n_nodes = NODE_W'(nn); n_edges = EDGE_CNT_W'(ne);
    yr = ref_sage(xr, nn, ne, ea, eb, DIN, DOUT, wr, br, wn, bn, wp, bp);
    ynr = ref_sage(xr, nn, ne, ea, eb, DIN, DOUT, wr, br, wn, bn, wp, bp, 1'b1);
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != LX + ne + LP + 7) begin
      failures++; $display("latency %0d expected %0d", cyc, LX + ne + LP + 7);
    end
    while (!done_n) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != LX + ne + LP + 7 + L2LAT + 1) begin
      failures++; $display("normalised latency %0d expected %0d", cyc, LX + ne + LP + 8 + L2LAT);
    end
    for (int v = 0; v < NODES; v++)
      for (int d = 0; d < DOUT; d++) begin
        checks++;
        if (longint'(yn[v][d]) != ynr[v*MAXD + d]) begin
          failures++;
          $display("normalised mismatch v=%0d d=%0d got %0d exp %0d", v, d, yn[v][d], ynr[v*MAXD + d]);
        end
      end
    for (int v = 0; v < NODES; v++)
      for (int d = 0; d < DOUT; d++) begin
        checks++;
        if (yr[v*MAXD + d] == 0) n_zero++; else n_pos++;
        if (longint'(y[v][d]) != yr[v*MAXD + d]) begin
          failures++;
          $display("mismatch v=%0d d=%0d got %0d exp %0d", v, d, y[v][d], yr[v*MAXD + d]);
        end
      end
  endtask

  initial begin
    wload = '0; start = 0; n_nodes = '0; n_edges = '0;
    for (int e = 0; e < MAXE_P; e++) edges[e] = '0;
    for (int v = 0; v < NODES; v++) for (int i = 0; i < DIN; i++) x[v][i] = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    wr = rand_w(DIN, DOUT, 900);  br = rand_b(DOUT, 300);
    wn = rand_w(DIN, DOUT, 900);  bn = rand_b(DOUT, 300);
    wp = rand_w(DOUT, DOUT, 600); bp = rand_b(DOUT, 300);
    load_unit(3 * LAYER, DIN, DOUT, wr, br);
    load_unit(3 * LAYER + 1, DIN, DOUT, wn, bn);
    load_unit(3 * LAYER + 2, DOUT, DOUT, wp, bp);
    run(10, 45);
    run(10, 0);
    for (int t = 0; t < 15; t++) run($urandom_range(10), $urandom_range(45));
    checks++;
    if (n_zero == 0 || n_pos == 0) begin failures++; $display("ReLU cases not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
