// sage_layer: one GraphSAGE convolution over a graph of up to NODES nodes.
//
//   r[i]   = Wr x[i] + br                       (root linear)
//   n[i]   = Wn x[i] + bn                       (neighbour linear)
//   a[i]   = mean over neighbours j of n[j]     (message passing)
//   c[i]   = sat(r[i] + a[i])                   (combination)
//   y[i]   = ReLU(Wp c[i] + bp)                 (projection linear, 2D ReLU)
//
// The five stages and their order (root linear, neighbour linear, message
// passing, projection linear, 2D ReLU) follow the network's block diagram;
// the combination by addition and the placement of the projection after it
// (DOUT -> DOUT) are this design's reading of "combining a learned projection
// of the node's own features with an aggregated projection of the features of
// its neighbours". The optional l2 normalisation after combination is
// available through NORMALIZE (l2_norm between combination and projection);
// it is off by default because the network description calls it optional.
//
// Architecture: root and neighbour linears run side by side on the same
// input, then message passing, then the projection; the stages are sequenced
// by a small FSM with registered start pulses. Every linear is a
// linear_engine with its own weight memory on the shared load bus, with ids
// 3*LAYER (root), 3*LAYER+1 (neighbour) and 3*LAYER+2 (projection).
//
// Timing: start is sampled while idle; with Lx = ceil(DOUT/OUT_PAR)*DIN + 1,
// Lp = ceil(DOUT/OUT_PAR)*DOUT + 1 and E = min(n_edges, MAXE), done pulses
// Lx + E + Lp + 7 cycles after start (the sampling edge counted as cycle 1),
// plus the l2_norm latency + 1 when NORMALIZE is set.
// x, graph and n_nodes must stay stable while busy; y is valid from done until the next start.
module sage_layer
  import gnn_pkg::*;
#(
  parameter int NODES   = MAX_NODES,
  parameter int MAXE    = MAX_EDGES,
  parameter int DIN     = H2,
  parameter int DOUT    = H2,
  parameter int OUT_PAR = 32,
  parameter int LAYER   = 0,
  parameter bit NORMALIZE = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  wload_t                wload,
  input  logic                  start,
  input  logic [NODE_W-1:0]     n_nodes,
  input  logic [EDGE_CNT_W-1:0] n_edges,
  input  edge_t                 edges [MAXE],
  input  data_t                 x [NODES][DIN],
  output data_t                 y [NODES][DOUT],
  output logic                  busy,
  output logic                  done
);

  typedef enum logic [2:0] {S_IDLE, S_LIN, S_MP, S_L2, S_PROJ} state_t;
  state_t state;

  logic lin_start, mp_start, norm_start, proj_start;
  logic root_done, neigh_done, mp_done, norm_done, proj_done;
  logic root_busy, neigh_busy, mp_busy, norm_busy, proj_busy;

  data_t root_y  [NODES][DOUT];
  data_t neigh_y [NODES][DOUT];
  data_t agg     [NODES][DOUT];
  data_t comb    [NODES][DOUT];
  data_t comb_n  [NODES][DOUT];
  data_t proj_y  [NODES][DOUT];

  linear_engine #(.NODES(NODES), .DIN(DIN), .DOUT(DOUT), .OUT_PAR(OUT_PAR),
                  .ID(lin_id(LAYER, 0))) u_root (
    .clk, .rst_n, .wload, .start(lin_start), .x, .y(root_y),
    .busy(root_busy), .done(root_done));

  linear_engine #(.NODES(NODES), .DIN(DIN), .DOUT(DOUT), .OUT_PAR(OUT_PAR),
                  .ID(lin_id(LAYER, 1))) u_neigh (
    .clk, .rst_n, .wload, .start(lin_start), .x, .y(neigh_y),
    .busy(neigh_busy), .done(neigh_done));

  message_passing #(.NODES(NODES), .DIM(DOUT), .MAXE(MAXE)) u_mp (
    .clk, .rst_n, .start(mp_start), .n_nodes, .n_edges, .edges, .h(neigh_y),
    .agg, .busy(mp_busy), .done(mp_done));

  always_comb begin
    for (int v = 0; v < NODES; v++)
      for (int d = 0; d < DOUT; d++)
        comb[v][d] = sat(acc_t'(root_y[v][d]) + acc_t'(agg[v][d]));
  end

  if (NORMALIZE) begin : g_l2
    l2_norm #(.NODES(NODES), .DIM(DOUT)) u_l2 (
      .clk, .rst_n, .start(norm_start), .x(comb), .y(comb_n), .busy(norm_busy),
      .done(norm_done));
  end else begin : g_no_l2
    assign comb_n    = comb;
    assign norm_busy = 1'b0;
    assign norm_done = 1'b0;
  end

  linear_engine #(.NODES(NODES), .DIN(DOUT), .DOUT(DOUT), .OUT_PAR(OUT_PAR),
                  .ID(lin_id(LAYER, 2))) u_proj (
    .clk, .rst_n, .wload, .start(proj_start), .x(comb_n), .y(proj_y),
    .busy(proj_busy), .done(proj_done));

  relu2d #(.ROWS(NODES), .COLS(DOUT)) u_relu (.x(proj_y), .y);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      lin_start  <= 1'b0;
      mp_start   <= 1'b0;
      norm_start <= 1'b0;
      proj_start <= 1'b0;
      done       <= 1'b0;
    end else begin
      lin_start  <= 1'b0;
      mp_start   <= 1'b0;
      norm_start <= 1'b0;
      proj_start <= 1'b0;
      done       <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          lin_start <= 1'b1;
          state     <= S_LIN;
        end
        // Root and neighbour engines have the same shape and finish together.
        S_LIN: if (root_done) begin
          mp_start <= 1'b1;
          state    <= S_MP;
        end
        S_MP: if (mp_done) begin
          if (NORMALIZE) begin
            norm_start <= 1'b1;
            state      <= S_L2;
          end else begin
            proj_start <= 1'b1;
            state      <= S_PROJ;
          end
        end
        S_L2: if (norm_done) begin
          proj_start <= 1'b1;
          state      <= S_PROJ;
        end
        S_PROJ: if (proj_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // The two input linears are started together and must finish together.
  assert property (@(posedge clk) disable iff (!rst_n) root_done == neigh_done);
  // No sub-unit runs while the layer is idle.
  assert property (@(posedge clk) disable iff (!rst_n)
    state == S_IDLE |-> !(root_busy || neigh_busy || mp_busy || norm_busy || proj_busy));

endmodule
