// tb_mlp_head: self-checking test of the four-layer MLP head. Loads random
// weights for the four linear units (ids 12..15), feeds random pooled
// vectors and compares q with the reference chain Linear-ReLU x3, Linear.
// Checks the latency L1+L2+L3+L4+5 and that both signs of q were produced
// (the last layer has no ReLU).
module tb_mlp_head;
  import gnn_pkg::*;
  `include "gnn_ref.svh"

  localparam int D0 = 16, D1 = 12, D2 = 8, D3 = 6, OUT_PAR = 4;
  localparam int L1 = ((D1 + OUT_PAR - 1) / OUT_PAR) * D0 + 1;
  localparam int L2 = ((D2 + OUT_PAR - 1) / OUT_PAR) * D1 + 1;
  localparam int L3 = ((D3 + OUT_PAR - 1) / OUT_PAR) * D2 + 1;
  localparam int L4 = D3 + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  wload_t wload;
  logic start, busy, done;
  data_t g [D0];
  data_t q;

  mlp_head #(.D0(D0), .D1(D1), .D2(D2), .D3(D3), .OUT_PAR(OUT_PAR)) dut (
    .clk, .rst_n, .wload, .start, .g, .q, .busy, .done);

  int checks = 0, failures = 0, negq = 0, posq = 0;
  dyn_t w1, w2, w3, w4, b1, b2, b3, b4;

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

  task automatic run();
    dyn_t x0, y1, y2, y3, y4;
    int cyc;
    x0 = zeros(MAXN * MAXD);
    for (int d = 0; d < D0; d++) begin
      x0[d] = longint'($urandom_range(4096)) - 2048;
      g[d] = data_t'(x0[d]);
    end
    y1 = ref_relu(ref_linear(x0, 1, D0, D1, w1, b1));
    y2 = ref_relu(ref_linear(y1, 1, D1, D2, w2, b2));
    y3 = ref_relu(ref_linear(y2, 1, D2, D3, w3, b3));
    y4 = ref_linear(y3, 1, D3, 1, w4, b4);
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != L1 + L2 + L3 + L4 + 5) begin
      failures++; $display("latency %0d expected %0d", cyc, L1 + L2 + L3 + L4 + 5);
    end
    checks++;
    if (y4[0] < 0) negq++; else posq++;
    if (longint'(q) != y4[0]) begin
      failures++;
      $display("mismatch q got %0d exp %0d", q, y4[0]);
    end
  endtask

  initial begin
    wload = '0; start = 0;
    for (int d = 0; d < D0; d++) g[d] = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    w1 = rand_w(D0, D1, 700);  b1 = rand_b(D1, 300);
    w2 = rand_w(D1, D2, 700);  b2 = rand_b(D2, 300);
    w3 = rand_w(D2, D3, 900);  b3 = rand_b(D3, 300);
    w4 = rand_w(D3, 1, 1000);  b4 = rand_b(1, 100);
    // Positive layer-3 biases and output weights of alternating sign keep the last hidden layer alive so that q
    // takes both signs.
    for (int o = 0; o < D3; o++) if (b3[o] < 0) b3[o] = -b3[o] + 200;
    for (int i = 0; i < D3; i++)
      w4[i] = ((i % 2) == 0 ? 1 : -1) * (300 + longint'($urandom_range(700)));
    load_unit(12, D0, D1, w1, b1);
    load_unit(13, D1, D2, w2, b2);
    load_unit(14, D2, D3, w3, b3);
    load_unit(15, D3, 1, w4, b4);
    for (int t = 0; t < 60; t++) run();
    checks++;
    if (negq == 0 || posq == 0) begin failures++; $display("q sign cases: neg=%0d pos=%0d", negq, posq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
