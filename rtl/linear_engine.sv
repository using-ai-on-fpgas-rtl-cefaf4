// linear_engine: dense layer y[v] = W * x[v] + b, applied to every row v of a
// NODES x DIN feature map (NODES = 1 for a plain vector layer).
//
// The same engine serves as the root, neighbour and projection transforms of a
// SAGE layer and as each layer of the MLP head. To keep the multiplier count
// bounded it reuses its multipliers over time: NODES x OUT_PAR multipliers
// work on OUT_PAR output channels of every node at once, stepping through the
// DIN inputs one per cycle, then moving to the next group of OUT_PAR
// channels. The reuse factor is therefore DIN * ceil(DOUT/OUT_PAR); the
// multiplier-reuse idea follows the network's hardware plan, the grouping and
// OUT_PAR's default are this design's choice.
//
// Weights and biases live in a local memory written through the shared load
// bus (gnn_pkg::wload_t) when the bus id equals ID: address o*DIN+i holds
// W[o][i], address DOUT*DIN+o holds b[o]. Weights are read asynchronously.
//
// Timing: start is sampled while idle. The engine is busy for
// ceil(DOUT/OUT_PAR)*DIN cycles; y is updated group by group and done pulses
// for one cycle the cycle after the last group is written (latency
// ceil(DOUT/OUT_PAR)*DIN + 1 cycles from start to done). x must stay stable
// while busy. y holds its value until the next run.
module linear_engine
  import gnn_pkg::*;
#(
  parameter int NODES   = 10,
  parameter int DIN     = 64,
  parameter int DOUT    = 64,
  parameter int OUT_PAR = 32,
  parameter logic [WID_W-1:0] ID = '0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  wload_t wload,
  input  logic   start,
  input  data_t  x [NODES][DIN],
  output data_t  y [NODES][DOUT],
  output logic   busy,
  output logic   done
);

  localparam int NGROUP = (DOUT + OUT_PAR - 1) / OUT_PAR;
  localparam int NW     = DOUT * DIN;
  localparam int IW     = (DIN > 1) ? $clog2(DIN) : 1;
  localparam int GW     = (NGROUP > 1) ? $clog2(NGROUP) : 1;

  data_t w_mem [NW];
  data_t b_mem [DOUT];

  // Weight load port.
  always_ff @(posedge clk) begin
    if (wload.en && wload.id == ID) begin
      if (int'(wload.addr) < NW)
        w_mem[int'(wload.addr)] <= wload.data;
      else if (int'(wload.addr) < NW + DOUT)
        b_mem[int'(wload.addr) - NW] <= wload.data;
    end
  end

  logic [IW-1:0] i_cnt;
  logic [GW-1:0] g_cnt;
  acc_t          acc [NODES][OUT_PAR];

  // Products of the current input column with the current weight group,
  // added to the running sums (bias seeded on the first column).
  acc_t acc_next [NODES][OUT_PAR];
  always_comb begin
    for (int v = 0; v < NODES; v++) begin
      for (int p = 0; p < OUT_PAR; p++) begin
        int o;
        acc_t base;
        acc_t prod;
        o = int'(g_cnt) * OUT_PAR + p;
        if (o < DOUT) begin
          base = (i_cnt == '0) ? (acc_t'(b_mem[o]) <<< FRAC) : acc[v][p];
          prod = acc_t'(x[v][i_cnt]) * acc_t'(w_mem[o * DIN + int'(i_cnt)]);
        end else begin
          base = '0;
          prod = '0;
        end
        acc_next[v][p] = base + prod;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      i_cnt <= '0;
      g_cnt <= '0;
      for (int v = 0; v < NODES; v++) begin
        for (int p = 0; p < OUT_PAR; p++) acc[v][p] <= '0;
        for (int o = 0; o < DOUT; o++) y[v][o] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          i_cnt <= '0;
          g_cnt <= '0;
        end
      end else begin
        acc <= acc_next;
        if (int'(i_cnt) == DIN - 1) begin
          // Last input column of this group: write the outputs.
          for (int v = 0; v < NODES; v++)
            for (int p = 0; p < OUT_PAR; p++)
              if (int'(g_cnt) * OUT_PAR + p < DOUT)
                y[v][int'(g_cnt) * OUT_PAR + p] <= sat(acc_next[v][p] >>> FRAC);
          i_cnt <= '0;
          if (int'(g_cnt) == NGROUP - 1) begin
            g_cnt <= '0;
            busy  <= 1'b0;
            done  <= 1'b1;
          end else begin
            g_cnt <= g_cnt + 1'b1;
          end
        end else begin
          i_cnt <= i_cnt + 1'b1;
        end
      end
    end
  end

endmodule
