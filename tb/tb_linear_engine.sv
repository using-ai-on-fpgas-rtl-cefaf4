// tb_linear_engine: self-checking test of the time-multiplexed dense layer.
// Loads random weights and biases through the load bus (plus writes to a
// different id, which must be ignored), runs random inputs and compares every
// output with a reference computed here with 64-bit integer arithmetic
// (sum of products plus bias shifted by FRAC, truncated, saturated). Also
// checks the start-to-done latency ceil(DOUT/OUT_PAR)*DIN + 1 and runs a
// case with large weights to hit saturation at both ends.
module tb_linear_engine;
  import gnn_pkg::*;

  localparam int NODES = 3, DIN = 5, DOUT = 7, OUT_PAR = 3;
  localparam logic [WID_W-1:0] MYID = 5'd9;
  localparam int LAT = ((DOUT + OUT_PAR - 1) / OUT_PAR) * DIN + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  wload_t wload;
  logic start, busy, done;
  data_t x [NODES][DIN];
  data_t y [NODES][DOUT];

  linear_engine #(.NODES(NODES), .DIN(DIN), .DOUT(DOUT), .OUT_PAR(OUT_PAR), .ID(MYID)) dut (
    .clk, .rst_n, .wload, .start, .x, .y, .busy, .done);

  int checks = 0, failures = 0, sat_hits = 0;
  longint W [DOUT][DIN];
  longint B [DOUT];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input logic [WID_W-1:0] id, input int addr, input longint val);
    wload.en = 1; wload.id = id; wload.addr = WADDR_W'(addr); wload.data = data_t'(val);
    @(posedge clk); #1;
    wload.en = 0;
  endtask

  task automatic load_all(input int wmax);
    for (int o = 0; o < DOUT; o++)
      for (int i = 0; i < DIN; i++) begin
        W[o][i] = longint'($urandom_range(2 * wmax)) - longint'(wmax);
        load(MYID, o * DIN + i, W[o][i]);
        load(MYID + 1, o * DIN + i, 12345); // other unit: must be ignored
      end
    for (int o = 0; o < DOUT; o++) begin
      B[o] = longint'($urandom_range(2000)) - 1000;
      load(MYID, DOUT * DIN + o, B[o]);
    end
  endtask

  function automatic longint ref_sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  task automatic run_and_check(input int xmax);
    int cyc;
    for (int v = 0; v < NODES; v++)
      for (int i = 0; i < DIN; i++)
        x[v][i] = data_t'(longint'($urandom_range(2 * xmax)) - longint'(xmax));
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != LAT) begin failures++; $display("latency %0d expected %0d", cyc, LAT); end
    for (int v = 0; v < NODES; v++)
      for (int o = 0; o < DOUT; o++) begin
        longint s, r;
        s = B[o] * 1024;
        for (int i = 0; i < DIN; i++) s += longint'(x[v][i]) * W[o][i];
        r = ref_sat(s >>> 10);
        if (r == 32767 || r == -32768) sat_hits++;
        checks++;
        if (longint'(y[v][o]) != r) begin
          failures++;
          $display("mismatch v=%0d o=%0d got %0d exp %0d", v, o, y[v][o], r);
        end
      end
  endtask

  initial begin
    wload = '0; start = 0;
    for (int v = 0; v < NODES; v++) for (int i = 0; i < DIN; i++) x[v][i] = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    load_all(600);
    repeat (5) run_and_check(3000);
    load_all(32000);
    repeat (3) run_and_check(32000);
    checks++;
    if (sat_hits == 0) begin failures++; $display("no saturation case reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
