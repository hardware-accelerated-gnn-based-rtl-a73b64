// gnn_pkg: types, sizes and static-graph functions shared by the hit-filter blocks.
//
// The hit filter runs a small Interaction Network on the sense-wire hits of one
// trigger sector. Each wire is a graph node. Edges follow three geometric rules:
// neighbours in the same layer (delta-wire -1 and +1), the wire directly outside
// in the next layer (delta-layer +1, delta-wire 0) and the three wires two layers
// out (delta-layer +2, delta-wire -1, 0, +1). The graph is static: every edge the
// rules allow exists in hardware, and an edge is "live" for an event only when both
// of its wires are hit.
//
// Geometry. The sector is modelled as a regular grid of N_LAYERS x N_WIRES wires
// (node id = layer * wires + wire, no wrap-around at the sector edges). The real
// sector has irregular layers; the edge rules, the 4-bit feature format and the
// node count (495) follow the paper, the regular grid is this design's choice.
// Edge ids are numbered source node by source node, and within one source by
// slot in the order listed above; edge_id() gives the id in closed form.
//
// Static features (x, y per node, delta-r, delta-phi per edge) are 4-bit signed
// values in the normalised range [-1, 1) (LSB = 1/8). Here they are simple linear
// functions of layer and wire index; a real deployment would replace the four
// functions node_x, node_y, edge_dr, edge_dphi by tables of the true wire
// positions.
package gnn_pkg;

  // ---------------------------------------------------------------- numbers
  localparam int Q_BITS    = 4;   // inputs, weights and activations
  localparam int BIAS_BITS = 16;  // biases
  localparam int SCORE_BITS = 8;  // classifier output
  localparam int N_SLOTS   = 6;   // candidate edges per source node (edge rules below)

  typedef logic signed [Q_BITS-1:0]     q4_t;
  typedef logic signed [BIAS_BITS-1:0]  bias_t;
  typedef logic signed [SCORE_BITS-1:0] score_t;

  // One sense wire as delivered by the front end (already normalised and
  // quantised to 4 bits).
  typedef struct packed {
    logic hit;
    q4_t  adc;
    q4_t  tdc;
  } hit_t;

  // Node features of the first network block: static x, y and the ADC value.
  typedef struct packed {
    q4_t x;
    q4_t y;
    q4_t adc;
  } node_feat_t;

  // Edge features: static delta-r, delta-phi and the TDC difference.
  typedef struct packed {
    q4_t dr;
    q4_t dphi;
    q4_t dtdc;
  } edge_feat_t;

  // ------------------------------------------------------ network shape
  // One hidden layer per MLP. The widths are chosen so that the network has
  // 211 trainable parameters, the count the paper gives after compression.
  localparam int EMB      = 4;                       // R1 and O output width
  localparam int R1_IN    = 9;                       // src, dst node feats + edge feats
  localparam int R1_HID   = 7;
  localparam int O_IN     = 3 + EMB;                 // node feats + aggregated R1
  localparam int O_HID    = 4;
  localparam int R2_IN    = 3 * EMB;                 // src, dst O output + R1 output
  localparam int R2_HID   = 4;

  typedef struct packed {
    logic [R1_HID-1:0][R1_IN-1:0][Q_BITS-1:0]  w1;
    logic [R1_HID-1:0][BIAS_BITS-1:0]          b1;
    logic [EMB-1:0][R1_HID-1:0][Q_BITS-1:0]    w2;
    logic [EMB-1:0][BIAS_BITS-1:0]             b2;
  } r1_weights_t;

  typedef struct packed {
    logic [O_HID-1:0][O_IN-1:0][Q_BITS-1:0]    w1;
    logic [O_HID-1:0][BIAS_BITS-1:0]           b1;
    logic [EMB-1:0][O_HID-1:0][Q_BITS-1:0]     w2;
    logic [EMB-1:0][BIAS_BITS-1:0]             b2;
  } o_weights_t;

  typedef struct packed {
    logic [R2_HID-1:0][R2_IN-1:0][Q_BITS-1:0]  w1;
    logic [R2_HID-1:0][BIAS_BITS-1:0]          b1;
    logic [0:0][R2_HID-1:0][Q_BITS-1:0]        w2;
    logic [0:0][BIAS_BITS-1:0]                 b2;
  } r2_weights_t;

  // ------------------------------------------------------ edge rules
  function automatic int slot_dl(input int k);
    case (k)
      0, 1:    return 0;
      2:       return 1;
      default: return 2;
    endcase
  endfunction

  function automatic int slot_dw(input int k);
    case (k)
      0:       return -1;
      1:       return 1;
      2:       return 0;
      3:       return -1;
      4:       return 0;
      default: return 1;
    endcase
  endfunction

  function automatic bit slot_exists(input int nl, input int nw, input int l,
                                     input int w, input int k);
    int l2, w2;
    l2 = l + slot_dl(k);
    w2 = w + slot_dw(k);
    return (l2 < nl) && (w2 >= 0) && (w2 < nw);
  endfunction

  // Number of edges leaving one row (layer) of the grid.
  function automatic int row_edges(input int nl, input int nw, input int l);
    int e;
    e = 2 * (nw - 1);
    if (l + 1 < nl) e += nw;
    if (l + 2 < nl) e += 3 * nw - 2;
    return e;
  endfunction

  function automatic int num_edges(input int nl, input int nw);
    int e;
    e = 0;
    for (int l = 0; l < nl; l++) e += row_edges(nl, nw, l);
    return e;
  endfunction

  // Id of the edge leaving node (l, w) through slot k (slot must exist).
  function automatic int edge_id(input int nl, input int nw, input int l,
                                 input int w, input int k);
    int id, s;
    id = 0;
    for (int r = 0; r < l; r++) id += row_edges(nl, nw, r);
    // edges of the wires 0 .. w-1 in this row
    s = ((w > 0) ? w - 1 : 0) + ((w < nw - 1) ? w : nw - 1);
    id += s;
    if (l + 1 < nl) id += w;
    if (l + 2 < nl) id += s + w;
    for (int j = 0; j < k; j++)
      if (slot_exists(nl, nw, l, w, j)) id++;
    return id;
  endfunction

  // --------------------------------------------------- static features
  function automatic q4_t node_x(input int nl, input int l);
    if (nl < 2) return '0;
    return q4_t'(((2 * l - (nl - 1)) * 7) / (nl - 1));
  endfunction

  function automatic q4_t node_y(input int nw, input int w);
    if (nw < 2) return '0;
    return q4_t'(((2 * w - (nw - 1)) * 7) / (nw - 1));
  endfunction

  function automatic q4_t edge_dr(input int k);
    return q4_t'(3 * slot_dl(k));
  endfunction

  function automatic q4_t edge_dphi(input int k);
    return q4_t'(3 * slot_dw(k));
  endfunction

  // Saturating 4-bit difference b - a (TDC difference of an edge).
  function automatic q4_t sat_sub4(input q4_t b, input q4_t a);
    logic signed [4:0] d;
    d = 5'(b) - 5'(a);
    if (d > 5'sd7)  return 4'sd7;
    if (d < -5'sd8) return -4'sd8;
    return q4_t'(d);
  endfunction

  function automatic int ceil_div(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

endpackage
