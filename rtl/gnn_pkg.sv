// gnn_pkg: types, sizes and arithmetic helpers shared by the GraphSAGE
// regression network for the overlap-region muon trigger.
//
// Numbers are signed fixed point, DATA_W bits wide with FRAC fractional bits
// (16 bits with 10 fractional bits by default, i.e. a range of [-32, 32)).
// The 16-bit width is the precision the network is sized for; the split into
// integer and fraction bits is this design's choice. Products are accumulated
// at full precision, then shifted right by FRAC (truncation towards minus
// infinity) and saturated back to DATA_W bits.
//
// Graph sizes follow the network description: at most 10 nodes (one per
// detector layer used), at most 45 undirected edges (all node pairs), three
// input features per node and SAGE widths 3->128->64->64->64.
//
// Weights of every linear unit are written through one shared load bus,
// wload_t: each linear unit owns an identifier and answers only to it.
package gnn_pkg;

  localparam int DATA_W   = 16;
  localparam int FRAC     = 10;
  localparam int ACC_W    = 48;
  localparam int MAX_NODES = 10;
  localparam int MAX_EDGES = 45;
  localparam int NODE_W   = 4;   // node index width (0..15)
  localparam int EDGE_CNT_W = 6; // edge count width (0..63)
  localparam int D_IN     = 3;
  localparam int H1       = 128; // 4h
  localparam int H2       = 64;  // 2h
  localparam int MLP_D1   = 64;
  localparam int MLP_D2   = 32;
  localparam int MLP_D3   = 16;
  localparam int WID_W    = 5;   // linear-unit identifier width
  localparam int WADDR_W  = 16;  // load address width
  localparam int RECIP_FRAC = 16; // fraction bits of the 1/n table

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [NODE_W-1:0]        node_idx_t;

  // One undirected edge between two nodes.
  typedef struct packed {
    node_idx_t a;
    node_idx_t b;
  } edge_t;

  // Weight/bias load beat. Address o*DIN+i holds W[o][i]; address
  // DOUT*DIN+o holds bias b[o].
  typedef struct packed {
    logic                 en;
    logic [WID_W-1:0]     id;
    logic [WADDR_W-1:0]   addr;
    data_t                data;
  } wload_t;

  // Identifiers of the linear units: SAGE layer l has root 3l, neighbour
  // 3l+1 and projection 3l+2; MLP layer k has 12+k.
  function automatic logic [WID_W-1:0] lin_id(input int layer, input int which);
    return WID_W'(3 * layer + which);
  endfunction

  // Saturate a wide value to DATA_W bits.
  function automatic data_t sat(input acc_t v);
    if (v > acc_t'(2 ** (DATA_W - 1) - 1)) return data_t'(2 ** (DATA_W - 1) - 1);
    if (v < -acc_t'(2 ** (DATA_W - 1)))    return data_t'(-(2 ** (DATA_W - 1)));
    return data_t'(v);
  endfunction

  // Round-to-nearest 2^RECIP_FRAC / n for n = 1..15, 0 for n = 0.
  function automatic logic [RECIP_FRAC:0] recip(input int unsigned n);
    if (n == 0) return '0;
    return (RECIP_FRAC+1)'(((2 ** RECIP_FRAC) + n / 2) / n);
  endfunction

  // Mean of a sum over n terms: (sum * recip(n)) >>> RECIP_FRAC, saturated.
  function automatic data_t mean_of(input acc_t sum, input int unsigned n);
    acc_t prod;
    prod = (sum * $signed({1'b0, recip(n)})) >>> RECIP_FRAC;
    return sat(prod);
  endfunction

endpackage
