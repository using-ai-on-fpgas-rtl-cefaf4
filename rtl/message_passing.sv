// message_passing: mean aggregation of neighbour features over an edge list.
//
// For every present node i (index below n_nodes) it computes
//   agg[i] = (1/deg(i)) * sum over edges {i,j} of h[j]
// where h is the neighbour-projected feature map. Each listed edge is
// undirected and carries a message both ways, so a list of at most 45 node
// pairs covers the fully connected 10-node graph. Edges that name a node at
// or above n_nodes are skipped; a self edge {i,i} adds h[i] once. A node with
// no neighbour gets agg = 0.
//
// Architecture: one edge per cycle. The two endpoint rows are added to
// DIM-wide running sums held per node, and per-node degree counters are
// bumped. After the last edge a normalisation cycle multiplies each sum by a
// rounded 2^16/deg constant (gnn_pkg::mean_of) and saturates.
// Mean aggregation, the undirected reading of the edge list and the 1/deg
// constant are this design's choices; the network description says only that
// neighbour projections are aggregated over the edge list.
//
// Timing: start is sampled while idle; done pulses n_edges + 3 cycles after
// start. h, edges, n_nodes and n_edges must stay stable while busy. agg holds
// until the next run.
module message_passing
  import gnn_pkg::*;
#(
  parameter int NODES     = MAX_NODES,
  parameter int DIM       = H2,
  parameter int MAXE      = MAX_EDGES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [NODE_W-1:0]     n_nodes,
  input  logic [EDGE_CNT_W-1:0] n_edges,
  input  edge_t                 edges [MAXE],
  input  data_t                 h [NODES][DIM],
  output data_t                 agg [NODES][DIM],
  output logic                  busy,
  output logic                  done
);

  localparam int SUM_W = DATA_W + 8;

  typedef enum logic [1:0] {S_IDLE, S_EDGE, S_NORM} state_t;
  state_t state;

  logic [EDGE_CNT_W-1:0]     e_cnt;
  logic signed [SUM_W-1:0]   sum [NODES][DIM];
  logic [EDGE_CNT_W-1:0]     deg [NODES];

  edge_t cur;
  logic  cur_ok;
  always_comb begin
    cur    = edges[(int'(e_cnt) < MAXE) ? int'(e_cnt) : 0];
    cur_ok = (e_cnt < n_edges) && (int'(e_cnt) < MAXE) &&
             (cur.a < n_nodes) && (cur.b < n_nodes) &&
             (int'(cur.a) < NODES) && (int'(cur.b) < NODES);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      e_cnt <= '0;
      done  <= 1'b0;
      for (int v = 0; v < NODES; v++) begin
        deg[v] <= '0;
        for (int d = 0; d < DIM; d++) begin
          sum[v][d] <= '0;
          agg[v][d] <= '0;
        end
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_EDGE;
            e_cnt <= '0;
            for (int v = 0; v < NODES; v++) begin
              deg[v] <= '0;
              for (int d = 0; d < DIM; d++) sum[v][d] <= '0;
            end
          end
        end
        S_EDGE: begin
          if (e_cnt >= n_edges || int'(e_cnt) >= MAXE) begin
            state <= S_NORM;
          end else begin
            if (cur_ok) begin
              if (cur.a == cur.b) begin
                deg[cur.a] <= deg[cur.a] + 1'b1;
                for (int d = 0; d < DIM; d++)
                  sum[cur.a][d] <= sum[cur.a][d] + SUM_W'(h[cur.a][d]);
              end else begin
                deg[cur.a] <= deg[cur.a] + 1'b1;
                deg[cur.b] <= deg[cur.b] + 1'b1;
                for (int d = 0; d < DIM; d++) begin
                  sum[cur.a][d] <= sum[cur.a][d] + SUM_W'(h[cur.b][d]);
                  sum[cur.b][d] <= sum[cur.b][d] + SUM_W'(h[cur.a][d]);
                end
              end
            end
            e_cnt <= e_cnt + 1'b1;
          end
        end
        S_NORM: begin
          for (int v = 0; v < NODES; v++)
            for (int d = 0; d < DIM; d++)
              agg[v][d] <= mean_of(acc_t'(sum[v][d]), int'(deg[v]));
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
