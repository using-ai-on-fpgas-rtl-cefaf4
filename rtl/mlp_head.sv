// mlp_head: the four-layer perceptron that turns the pooled graph vector into
// the scalar q/pT estimate.
//
//   h1 = ReLU(W1 g  + b1)   D0 -> D1
//   h2 = ReLU(W2 h1 + b2)   D1 -> D2
//   h3 = ReLU(W3 h2 + b3)   D2 -> D3
//   q  =      W4 h3 + b4    D3 -> 1
//
// Four Linear layers with a 1D ReLU after them follow the network's block
// diagram; the widths 64 -> 64 -> 32 -> 16 -> 1 are this design's choice
// within "four Linear layers that progressively reduce the hidden dimension to
// one output" of at most 64 x 64. The last layer has no ReLU, so that the
// signed q/pT (charge sign included) can be produced.
//
// Architecture: four linear_engine instances (NODES = 1) run one after the
// other, sequenced by an FSM with registered start pulses. Their weights sit
// on the shared load bus with ids 12..15.
//
// Timing: start is sampled while idle; with Lk = ceil(Dk/OUT_PAR)*D(k-1) + 1,
// done pulses L1 + L2 + L3 + L4 + 5 cycles after start (the sampling edge
// counted as cycle 1). g must stay stable while busy; q holds until the next
// run.
module mlp_head
  import gnn_pkg::*;
#(
  parameter int D0      = H2,
  parameter int D1      = MLP_D1,
  parameter int D2      = MLP_D2,
  parameter int D3      = MLP_D3,
  parameter int OUT_PAR = 32
) (
  input  logic   clk,
  input  logic   rst_n,
  input  wload_t wload,
  input  logic   start,
  input  data_t  g [D0],
  output data_t  q,
  output logic   busy,
  output logic   done
);

  logic [3:0] st;      // per-layer start pulses
  logic [3:0] dn;      // per-layer done pulses
  logic [3:0] bz;      // per-layer busy
  logic [2:0] stage;   // 0 idle, 1..4 layer running

  data_t x1 [1][D0];
  data_t y1 [1][D1];
  data_t a1 [D1];
  data_t x2 [1][D1];
  data_t y2 [1][D2];
  data_t a2 [D2];
  data_t x3 [1][D2];
  data_t y3 [1][D3];
  data_t a3 [D3];
  data_t x4 [1][D3];
  data_t y4 [1][1];

  assign x1[0] = g;
  relu1d #(.COLS(D1)) u_r1 (.x(y1[0]), .y(a1));
  assign x2[0] = a1;
  relu1d #(.COLS(D2)) u_r2 (.x(y2[0]), .y(a2));
  assign x3[0] = a2;
  relu1d #(.COLS(D3)) u_r3 (.x(y3[0]), .y(a3));
  assign x4[0] = a3;
  assign q = y4[0][0];

  linear_engine #(.NODES(1), .DIN(D0), .DOUT(D1), .OUT_PAR(OUT_PAR), .ID(lin_id(4, 0))) u_l1 (
    .clk, .rst_n, .wload, .start(st[0]), .x(x1), .y(y1), .busy(bz[0]), .done(dn[0]));
  linear_engine #(.NODES(1), .DIN(D1), .DOUT(D2), .OUT_PAR(OUT_PAR), .ID(lin_id(4, 1))) u_l2 (
    .clk, .rst_n, .wload, .start(st[1]), .x(x2), .y(y2), .busy(bz[1]), .done(dn[1]));
  linear_engine #(.NODES(1), .DIN(D2), .DOUT(D3), .OUT_PAR(OUT_PAR), .ID(lin_id(4, 2))) u_l3 (
    .clk, .rst_n, .wload, .start(st[2]), .x(x3), .y(y3), .busy(bz[2]), .done(dn[2]));
  linear_engine #(.NODES(1), .DIN(D3), .DOUT(1),  .OUT_PAR(OUT_PAR), .ID(lin_id(5, 0))) u_l4 (
    .clk, .rst_n, .wload, .start(st[3]), .x(x4), .y(y4), .busy(bz[3]), .done(dn[3]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage <= '0;
      st    <= '0;
      done  <= 1'b0;
    end else begin
      st   <= '0;
      done <= 1'b0;
      if (stage == 3'd0) begin
        if (start) begin
          st[0] <= 1'b1;
          stage <= 3'd1;
        end
      end else if (dn[2'(stage - 3'd1)]) begin
        if (stage == 3'd4) begin
          done  <= 1'b1;
          stage <= 3'd0;
        end else begin
          st[2'(stage)] <= 1'b1;
          stage     <= stage + 3'd1;
        end
      end
    end
  end

  assign busy = (stage != 3'd0);

  // Only one layer of the head runs at a time.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(bz));

endmodule
