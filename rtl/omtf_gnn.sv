// omtf_gnn: graph neural network that estimates the signed inverse transverse
// momentum q/pT of a muon from the stubs it left in the barrel-endcap overlap
// region of the muon system.
//
// A graph of at most 10 nodes (one stub per detector layer, three features
// each) and at most 45 undirected edges is accepted on the input port. It
// passes through four GraphSAGE layers (3 -> 128 -> 64 -> 64 -> 64 features
// per node), a global mean pool over the present nodes, and a four-layer MLP
// head (64 -> 64 -> 32 -> 16 -> 1) whose output is q/pT in DATA_W-bit fixed
// point with FRAC fraction bits. Layer sequence, widths and graph sizes follow
// the network description; the fixed-point format, the input handshake, the
// sequential (one graph at a time) schedule and OUT_PAR are this design's
// choices. NORMALIZE turns on the optional l2 normalisation inside every
// SAGE layer (off by default).
//
// Interface:
//   in_valid/in_ready  a graph is taken in the cycle both are high; in_ready
//                      is high only while no graph is in flight. in_n_nodes
//                      (clipped to 10) and in_n_edges (clipped to 45) say how
//                      much of in_feat / in_edges is used; features of absent
//                      nodes are zeroed on capture.
//   out_valid/out_q    out_valid pulses for one cycle when out_q, held until
//                      the next result, is new.
//   wload              weight/bias load bus shared by the 16 linear units
//                      (ids 0..11 for the SAGE layers, 12..15 for the MLP, see
//                      gnn_pkg). The trained weights are not part of the
//                      design; they must be loaded before a graph is sent.
//
// Timing: every stage is started by a registered pulse from the stage before,
// so the latency in cycles is the sum of the stage latencies plus one cycle
// per stage hand-over (see the README for the numbers at default size).
module omtf_gnn
  import gnn_pkg::*;
#(
  parameter int OUT_PAR   = 32,
  parameter bit NORMALIZE = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  wload_t                wload,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [NODE_W-1:0]     in_n_nodes,
  input  data_t                 in_feat [MAX_NODES][D_IN],
  input  logic [EDGE_CNT_W-1:0] in_n_edges,
  input  edge_t                 in_edges [MAX_EDGES],
  output logic                  out_valid,
  output data_t                 out_q
);

  localparam int NV = MAX_NODES;
  localparam int NE = MAX_EDGES;

  // Captured graph.
  logic [NODE_W-1:0]     n_nodes;
  logic [EDGE_CNT_W-1:0] n_edges;
  data_t                 feat  [NV][D_IN];
  edge_t                 edges [NE];

  // Stage control: 0..3 SAGE layers, 4 mean pool, 5 MLP.
  logic [5:0] st, dn, bz;
  logic       running;
  logic [2:0] stage;

  data_t h1 [NV][H1];
  data_t h2 [NV][H2];
  data_t h3 [NV][H2];
  data_t h4 [NV][H2];
  data_t pooled [H2];
  data_t q;

  sage_layer #(.NODES(NV), .MAXE(NE), .DIN(D_IN), .DOUT(H1), .OUT_PAR(OUT_PAR), .LAYER(0),
               .NORMALIZE(NORMALIZE)) u_sage0 (
    .clk, .rst_n, .wload, .start(st[0]), .n_nodes, .n_edges, .edges, .x(feat), .y(h1),
    .busy(bz[0]), .done(dn[0]));
  sage_layer #(.NODES(NV), .MAXE(NE), .DIN(H1), .DOUT(H2), .OUT_PAR(OUT_PAR), .LAYER(1),
               .NORMALIZE(NORMALIZE)) u_sage1 (
    .clk, .rst_n, .wload, .start(st[1]), .n_nodes, .n_edges, .edges, .x(h1), .y(h2),
    .busy(bz[1]), .done(dn[1]));
  sage_layer #(.NODES(NV), .MAXE(NE), .DIN(H2), .DOUT(H2), .OUT_PAR(OUT_PAR), .LAYER(2),
               .NORMALIZE(NORMALIZE)) u_sage2 (
    .clk, .rst_n, .wload, .start(st[2]), .n_nodes, .n_edges, .edges, .x(h2), .y(h3),
    .busy(bz[2]), .done(dn[2]));
  sage_layer #(.NODES(NV), .MAXE(NE), .DIN(H2), .DOUT(H2), .OUT_PAR(OUT_PAR), .LAYER(3),
               .NORMALIZE(NORMALIZE)) u_sage3 (
    .clk, .rst_n, .wload, .start(st[3]), .n_nodes, .n_edges, .edges, .x(h3), .y(h4),
    .busy(bz[3]), .done(dn[3]));

  meanpool #(.NODES(NV), .DIM(H2)) u_pool (
    .clk, .rst_n, .start(st[4]), .n_nodes, .x(h4), .g(pooled), .busy(bz[4]), .done(dn[4]));

  mlp_head #(.D0(H2), .D1(MLP_D1), .D2(MLP_D2), .D3(MLP_D3), .OUT_PAR(OUT_PAR)) u_mlp (
    .clk, .rst_n, .wload, .start(st[5]), .g(pooled), .q, .busy(bz[5]), .done(dn[5]));

  assign in_ready = !running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      stage     <= '0;
      st        <= '0;
      out_valid <= 1'b0;
      out_q     <= '0;
      n_nodes   <= '0;
      n_edges   <= '0;
      for (int v = 0; v < NV; v++)
        for (int f = 0; f < D_IN; f++) feat[v][f] <= '0;
      for (int e = 0; e < NE; e++) edges[e] <= '0;
    end else begin
      st        <= '0;
      out_valid <= 1'b0;
      if (!running) begin
        if (in_valid) begin
          n_nodes <= (int'(in_n_nodes) > NV) ? NODE_W'(NV) : in_n_nodes;
          n_edges <= (int'(in_n_edges) > NE) ? EDGE_CNT_W'(NE) : in_n_edges;
          for (int v = 0; v < NV; v++)
            for (int f = 0; f < D_IN; f++)
              feat[v][f] <= (v < int'(in_n_nodes)) ? in_feat[v][f] : '0;
          edges   <= in_edges;
          running <= 1'b1;
          stage   <= '0;
          st[0]   <= 1'b1;
        end
      end else if (dn[stage]) begin
        if (stage == 3'd5) begin
          out_q     <= q;
          out_valid <= 1'b1;
          running   <= 1'b0;
        end else begin
          st[stage + 3'd1] <= 1'b1;
          stage            <= stage + 3'd1;
        end
      end
    end
  end

  // Stages run strictly one after another.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(bz));
  // No stage runs while no graph is in flight.
  assert property (@(posedge clk) disable iff (!rst_n) !running |-> bz == '0);

endmodule
