// meanpool: global mean pooling. Reduces the per-node embeddings of the
// n_nodes present nodes to one DIM-wide graph vector,
//   g[d] = (1/n_nodes) * sum over v < n_nodes of x[v][d],
// so that graphs of any size up to NODES feed a fixed-width MLP.
//
// Architecture: one node row per cycle is added to DIM running sums; a final
// cycle multiplies by a rounded 2^16/n constant (gnn_pkg::mean_of) and
// saturates. An empty graph gives g = 0. The sequential accumulation and the
// reciprocal constant are this design's choices.
//
// Timing: start is sampled while idle; done pulses n_nodes + 3 cycles after
// start (n_nodes clipped to NODES). x and n_nodes must stay stable while
// busy. g holds until the next run.
module meanpool
  import gnn_pkg::*;
#(
  parameter int NODES = MAX_NODES,
  parameter int DIM   = H2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [NODE_W-1:0] n_nodes,
  input  data_t             x [NODES][DIM],
  output data_t             g [DIM],
  output logic              busy,
  output logic              done
);

  localparam int SUM_W = DATA_W + 8;

  typedef enum logic [1:0] {S_IDLE, S_SUM, S_NORM} state_t;
  state_t state;

  logic [NODE_W-1:0]       v_cnt;
  logic [NODE_W-1:0]       n_eff;
  logic signed [SUM_W-1:0] sum [DIM];

  assign n_eff = (int'(n_nodes) > NODES) ? NODE_W'(NODES) : n_nodes;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      v_cnt <= '0;
      done  <= 1'b0;
      for (int d = 0; d < DIM; d++) begin
        sum[d] <= '0;
        g[d]   <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_SUM;
            v_cnt <= '0;
            for (int d = 0; d < DIM; d++) sum[d] <= '0;
          end
        end
        S_SUM: begin
          if (v_cnt >= n_eff) begin
            state <= S_NORM;
          end else begin
            for (int d = 0; d < DIM; d++)
              sum[d] <= sum[d] + SUM_W'(x[(int'(v_cnt) < NODES) ? int'(v_cnt) : 0][d]);
            v_cnt <= v_cnt + 1'b1;
          end
        end
        S_NORM: begin
          for (int d = 0; d < DIM; d++)
            g[d] <= mean_of(acc_t'(sum[d]), int'(n_eff));
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
