// tb_omtf_gnn: end-to-end test of the whole network at its default size
// (3 -> 128 -> 64 -> 64 -> 64 SAGE layers, mean pool, 64-64-32-16-1 MLP,
// 10 nodes, 45 edges). Loads random weights into all 16 linear units through
// the load bus, then streams graphs back to back: the next graph is put on
// the input while the previous one is still in flight, so the input stalls.
// Each result is compared with a bit-exact reference model of the network,
// and the latency with the sum of the stage latencies.
//
// Mechanisms counted (each must happen at least once): input stall, full
// 10-node/45-edge graph, empty graph, node and edge count clipping, edges to
// absent nodes skipped, self edges, isolated nodes, ReLU clipping, negative
// and positive q/pT.
module tb_omtf_gnn;
  import gnn_pkg::*;
  `include "gnn_ref.svh"

  localparam int NGRAPH = 10;
  localparam int OP = 32;  // default OUT_PAR of the top

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  wload_t wload;
  logic in_valid, in_ready, out_valid;
  logic [NODE_W-1:0] in_n_nodes;
  logic [EDGE_CNT_W-1:0] in_n_edges;
  data_t in_feat [MAX_NODES][D_IN];
  edge_t in_edges [MAX_EDGES];
  data_t out_q;

  omtf_gnn dut (.clk, .rst_n, .wload, .in_valid, .in_ready, .in_n_nodes, .in_feat,
                .in_n_edges, .in_edges, .out_valid, .out_q);

  int checks = 0, failures = 0;
  int c_stall = 0, c_full = 0, c_empty = 0, c_clip = 0, c_skip = 0, c_self = 0;
  int c_isol = 0, c_relu0 = 0, c_neg = 0, c_pos = 0;

  // Weights: SAGE layer l unit u in w[3l+u], MLP layer k in w[12+k].
  dyn_t  w [16];
  dyn_t  b [16];
  int    udin [16], udout [16];

  // Graph currently on the input port.
  int     g_nn, g_ne;
  dyn_t   g_x;
  elist_t g_ea, g_eb;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_unit(input int id);
    for (int o = 0; o < udout[id]; o++)
      for (int i = 0; i < udin[id]; i++) begin
        wload.en = 1; wload.id = WID_W'(id); wload.addr = WADDR_W'(o * udin[id] + i);
        wload.data = data_t'(w[id][o*MAXD + i]);
        @(posedge clk); #1;
      end
    for (int o = 0; o < udout[id]; o++) begin
      wload.en = 1; wload.id = WID_W'(id); wload.addr = WADDR_W'(udout[id] * udin[id] + o);
      wload.data = data_t'(b[id][o]);
      @(posedge clk); #1;
    end
    wload.en = 0;
  endtask

  // mode 0: full graph; 1: random; 2: empty; 3: counts above the limits;
  // 4: chain of nodes with the last node isolated.
  task automatic make_graph(input int mode);
    g_x = zeros(MAXN * MAXD);
    for (int e = 0; e < MAXE; e++) begin g_ea[e] = 0; g_eb[e] = 0; end
    case (mode)
      0: begin g_nn = 10; g_ne = 45; end
      2: begin g_nn = 0;  g_ne = $urandom_range(45); end
      3: begin g_nn = 12; g_ne = 50; end
      4: begin g_nn = $urandom_range(3, 10); g_ne = g_nn - 2; end
      default: begin g_nn = $urandom_range(1, 10); g_ne = $urandom_range(45); end
    endcase
    for (int v = 0; v < MAXN; v++)
      for (int f = 0; f < D_IN; f++) g_x[v*MAXD + f] = longint'($urandom_range(4096)) - 2048;
    for (int e = 0; e < MAXE; e++) begin
      if (mode == 0 || mode == 3) begin
        int k = 0;
        for (int a = 0; a < 10; a++)
          for (int bb = a + 1; bb < 10; bb++) begin
            if (k == e) begin g_ea[e] = a; g_eb[e] = bb; end
            k++;
          end
      end else if (mode == 4) begin
        g_ea[e] = e % 10; g_eb[e] = (e + 1) % 10;
      end else if (e == 0) begin
        g_ea[e] = 0; g_eb[e] = 0;   // self edge
      end else begin
        g_ea[e] = $urandom_range(11); g_eb[e] = $urandom_range(11);
      end
    end
    in_n_nodes = NODE_W'(g_nn);
    in_n_edges = EDGE_CNT_W'(g_ne);
    for (int v = 0; v < MAX_NODES; v++)
      for (int f = 0; f < D_IN; f++) in_feat[v][f] = data_t'(g_x[v*MAXD + f]);
    for (int e = 0; e < MAX_EDGES; e++) begin
      in_edges[e].a = NODE_W'(g_ea[e]);
      in_edges[e].b = NODE_W'(g_eb[e]);
    end
  endtask

  // Reference result and latency of the graph on the input port.
  task automatic reference(output longint q, output int lat);
    int nn, ne;
    int deg [MAXN];
    dyn_t h [5];
    dyn_t pooled, m1, m2, m3, m4;
    int dims [5];
    dims[0] = D_IN; dims[1] = H1; dims[2] = H2; dims[3] = H2; dims[4] = H2;
    nn = (g_nn > 10) ? 10 : g_nn;
    ne = (g_ne > 45) ? 45 : g_ne;
    if (g_nn > 10 || g_ne > 45) c_clip++;
    if (nn == 10 && ne == 45 && g_nn == 10) c_full++;
    if (nn == 0) c_empty++;
    for (int v = 0; v < MAXN; v++) deg[v] = 0;
    for (int e = 0; e < ne; e++) begin
      if (g_ea[e] >= nn || g_eb[e] >= nn) c_skip++;
      else begin
        if (g_ea[e] == g_eb[e]) c_self++;
        deg[g_ea[e]]++; deg[g_eb[e]]++;
      end
    end
    for (int v = 0; v < nn; v++) if (deg[v] == 0) c_isol++;
    h[0] = g_x;
    for (int v = 0; v < MAXN; v++) if (v >= nn) for (int d = 0; d < MAXD; d++) h[0][v*MAXD + d] = 0;
    lat = 0;
    for (int l = 0; l < 4; l++) begin
      int ngr;
      h[l+1] = ref_sage(h[l], nn, ne, g_ea, g_eb, dims[l], dims[l+1],
                        w[3*l], b[3*l], w[3*l+1], b[3*l+1], w[3*l+2], b[3*l+2]);
      for (int v = 0; v < nn; v++)
        for (int d = 0; d < dims[l+1]; d++) if (h[l+1][v*MAXD + d] == 0) c_relu0++;
      ngr = (dims[l+1] + OP - 1) / OP;
      lat += (ngr * dims[l] + 1) + ne + (ngr * dims[l+1] + 1) + 7;
    end
    pooled = ref_meanpool(h[4], nn, H2);
    lat += nn + 3;
    m1 = ref_relu(ref_linear(pooled, 1, H2, MLP_D1, w[12], b[12]));
    m2 = ref_relu(ref_linear(m1, 1, MLP_D1, MLP_D2, w[13], b[13]));
    m3 = ref_relu(ref_linear(m2, 1, MLP_D2, MLP_D3, w[14], b[14]));
    m4 = ref_linear(m3, 1, MLP_D3, 1, w[15], b[15]);
    lat += ((MLP_D1 + OP - 1) / OP) * H2 + 1 + ((MLP_D2 + OP - 1) / OP) * MLP_D1 + 1 +
           ((MLP_D3 + OP - 1) / OP) * MLP_D2 + 1 + MLP_D3 + 1 + 5;
    lat += 7;
    q = m4[0];
  endtask

  initial begin
    longint q_exp;
    int lat_exp, cyc, cur_nn, cur_ne;
    int modes [NGRAPH] = '{0, 1, 2, 3, 4, 1, 1, 4, 1, 0};
    wload = '0; in_valid = 0; in_n_nodes = '0; in_n_edges = '0;
    for (int v = 0; v < MAX_NODES; v++) for (int f = 0; f < D_IN; f++) in_feat[v][f] = '0;
    for (int e = 0; e < MAX_EDGES; e++) in_edges[e] = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;

    // Weights scaled roughly by 1/sqrt(fan-in); positive-leaning biases keep
    // a fraction of the ReLUs open.
    udin[0] = D_IN; udout[0] = H1; udin[1] = D_IN; udout[1] = H1; udin[2] = H1; udout[2] = H1;
    for (int l = 1; l < 4; l++) begin
      udin[3*l] = (l == 1) ? H1 : H2; udout[3*l] = H2;
      udin[3*l+1] = udin[3*l];        udout[3*l+1] = H2;
      udin[3*l+2] = H2;               udout[3*l+2] = H2;
    end
    udin[12] = H2; udout[12] = MLP_D1; udin[13] = MLP_D1; udout[13] = MLP_D2;
    udin[14] = MLP_D2; udout[14] = MLP_D3; udin[15] = MLP_D3; udout[15] = 1;
    for (int id = 0; id < 16; id++) begin
      int wmax;
      wmax = 1800 / $rtoi($sqrt(real'(udin[id])));
      w[id] = rand_w(udin[id], udout[id], wmax);
      b[id] = rand_b(udout[id], 400);
      for (int o = 0; o < udout[id]; o++) b[id][o] += 150;
    end
    for (int i = 0; i < MLP_D3; i++)
      w[15][i] = ((i % 2) == 0 ? 1 : -1) * (200 + longint'($urandom_range(600)));
    b[15][0] = -700;   // centre q/pT so that both signs occur
    for (int id = 0; id < 16; id++) load_unit(id);

    make_graph(modes[0]);
    in_valid = 1;
    for (int g = 0; g < NGRAPH; g++) begin
      while (!in_ready) begin @(posedge clk); #1; end
      reference(q_exp, lat_exp);
      cur_nn = g_nn; cur_ne = g_ne;
      @(posedge clk); #1;   // graph g taken at this edge
      cyc = 1;
      if (g + 1 < NGRAPH) make_graph(modes[g+1]);
      else in_valid = 0;
      while (!out_valid) begin
        @(posedge clk); #1; cyc++;
        if (in_valid && !in_ready) c_stall++;
      end
      checks++;
      if (cyc != lat_exp) begin
        failures++; $display("graph %0d latency %0d expected %0d", g, cyc, lat_exp);
      end
      checks++;
      if (q_exp < 0) c_neg++; else if (q_exp > 0) c_pos++;
      if (longint'(out_q) != q_exp) begin
        failures++; $display("graph %0d q got %0d expected %0d", g, out_q, q_exp);
      end else
        $display("graph %0d nodes=%0d edges=%0d q=%0d latency=%0d", g, cur_nn, cur_ne, out_q, cyc);
    end

    $display("mechanisms: stall=%0d full=%0d empty=%0d clip=%0d skip=%0d self=%0d isolated=%0d relu0=%0d neg=%0d pos=%0d",
             c_stall, c_full, c_empty, c_clip, c_skip, c_self, c_isol, c_relu0, c_neg, c_pos);
    checks++;
    if (c_stall == 0 || c_full == 0 || c_empty == 0 || c_clip == 0 || c_skip == 0 ||
        c_self == 0 || c_isol == 0 || c_relu0 == 0 || c_neg == 0 || c_pos == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
