// l2_norm: per-node l2 normalisation of a NODES x DIM feature map,
//   y[v] = x[v] / ||x[v]||   (y[v] = 0 when x[v] = 0),
// the optional step a SAGE layer can apply after combining the root and
// neighbour terms. The step itself follows the network description; the
// arithmetic below is this design's choice.
//
// Arithmetic (FRAC fraction bits in and out): ss = sum of x^2 (exact, 2*FRAC
// fraction bits); nrm = floor(sqrt(ss)) (FRAC fraction bits); recip =
// floor(2^RB / nrm) with RB = 30; y = sat((x * recip) >>> (RB - FRAC)).
// Outputs therefore lie in [-1, 1].
//
// Architecture: nodes are handled one at a time. One cycle forms the sum of
// squares with DIM multipliers, a bit-serial integer square root takes
// SQ_BITS cycles, a restoring divider takes RB + 1 cycles for the reciprocal,
// and one cycle scales the DIM channels with DIM multipliers.
//
// Timing: start is sampled while idle; done pulses
// NODES * (SQ_BITS + RB + 3) + 2 cycles after start. x must stay stable while
// busy; y holds until the next run.
module l2_norm
  import gnn_pkg::*;
#(
  parameter int NODES = MAX_NODES,
  parameter int DIM   = H2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  data_t x [NODES][DIM],
  output data_t y [NODES][DIM],
  output logic  busy,
  output logic  done
);

  localparam int RB      = 30;
  localparam int SS_W0   = 2 * DATA_W + $clog2(DIM + 1);
  localparam int SS_W    = SS_W0 + (SS_W0 % 2);   // even, for the 2-bit steps
  localparam int SQ_BITS = SS_W / 2;
  localparam int VW      = (NODES > 1) ? $clog2(NODES) : 1;

  typedef enum logic [2:0] {S_IDLE, S_SUMSQ, S_SQRT, S_DIV, S_SCALE, S_DONE} state_t;
  state_t state;

  logic [VW-1:0]       v_cnt;
  logic [5:0]          step;
  logic [SS_W-1:0]     ss;       // sum of squares; consumed by the square root
  logic [SQ_BITS-1:0]  root;     // square-root result
  logic [SQ_BITS+1:0]  rem;      // square-root remainder (at most 2*root)
  logic [RB:0]         quo;      // reciprocal quotient
  logic [RB:0]         drem;     // divider remainder

  // Sum of squares of the current node.
  logic [SS_W-1:0] ss_now;
  always_comb begin
    ss_now = '0;
    for (int d = 0; d < DIM; d++)
      ss_now += SS_W'($signed(x[v_cnt][d]) * $signed(x[v_cnt][d]));
  end

  // One step of the bit-serial square root: bring down two bits of ss.
  logic [SQ_BITS+3:0] rem_sh;
  logic [SQ_BITS+3:0] trial;
  always_comb begin
    rem_sh = {rem, ss[SS_W-1 -: 2]};
    trial  = (SQ_BITS + 4)'({root, 2'b01});
  end

  // One step of the restoring divider 2^RB / root.
  logic [RB+1:0] drem_sh;
  always_comb begin
    drem_sh = {drem, (int'(step) == 0)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      v_cnt <= '0;
      step  <= '0;
      ss    <= '0;
      root  <= '0;
      rem   <= '0;
      quo   <= '0;
      drem  <= '0;
      done  <= 1'b0;
      for (int v = 0; v < NODES; v++)
        for (int d = 0; d < DIM; d++) y[v][d] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          v_cnt <= '0;
          state <= S_SUMSQ;
        end
        S_SUMSQ: begin
          ss    <= ss_now;
          root  <= '0;
          rem   <= '0;
          step  <= '0;
          state <= S_SQRT;
        end
        S_SQRT: begin
          // Two bits of ss per step, most significant first.
          if (rem_sh >= trial) begin
            rem  <= (SQ_BITS + 2)'(rem_sh - trial);
            root <= {root[SQ_BITS-2:0], 1'b1};
          end else begin
            rem  <= (SQ_BITS + 2)'(rem_sh);
            root <= {root[SQ_BITS-2:0], 1'b0};
          end
          ss <= ss << 2;
          if (int'(step) == SQ_BITS - 1) begin
            step  <= '0;
            quo   <= '0;
            drem  <= '0;
            state <= S_DIV;
          end else begin
            step <= step + 1'b1;
          end
        end
        S_DIV: begin
          // Dividend 2^RB: a single one bit entering at the first step.
          if (root != '0 && drem_sh >= (RB + 2)'(root)) begin
            drem <= (RB + 1)'(drem_sh - (RB + 2)'(root));
            quo  <= {quo[RB-1:0], 1'b1};
          end else begin
            drem <= (RB + 1)'(drem_sh);
            quo  <= {quo[RB-1:0], 1'b0};
          end
          if (int'(step) == RB) begin
            step  <= '0;
            state <= S_SCALE;
          end else begin
            step <= step + 1'b1;
          end
        end
        S_SCALE: begin
          for (int d = 0; d < DIM; d++)
            y[v_cnt][d] <= (root == '0) ? '0 :
                           sat((acc_t'(x[v_cnt][d]) * acc_t'(quo)) >>> (RB - FRAC));
          if (int'(v_cnt) == NODES - 1) begin
            state <= S_DONE;
          end else begin
            v_cnt <= v_cnt + 1'b1;
            state <= S_SUMSQ;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
