// gnn_hit_filter: GNN-based hit filter for one CDC trigger sector (top level).
//
// A dataflow accelerator for a compressed Interaction Network that classifies
// every hit wire of an event as track-like or background-like and removes the
// background hits before track finding. Data flow, as in the paper's block
// diagram:
//
//   hits -> fork -+-> Scatter SB 1 -> R1 PEs -> fork -+-> Aggregate SB 1 -> O PEs
//                 |                                   |        ^              |
//                 +-> hit FIFO -----------------------|--------+              v
//                 |                                   +-> edge FIFO --> Scatter SB 2
//                 |                                                           |
//                 |                                R2 PEs <-------------------+
//                 |                                  |
//                 |                          Aggregate SB 2 (score per node)
//                 |                                  v
//                 +-> output FIFO -------------> Threshold -> filtered hits
//
// R1 (edge block) sees both end nodes (x, y, ADC) and the edge features (delta-r,
// delta-phi, delta-TDC); its results are max-aggregated onto their destination
// nodes; O (node block) updates each node from its features and that maximum;
// R2 (edge block) scores each edge from the updated end nodes and the R1 edge
// result; the scores are max-aggregated onto the nodes, and a node's hit is kept
// when its score reaches thr. Feeding R2 with the R1 edge result (rather than
// the raw edge features) follows the usual Interaction Network; the paper's
// diagram draws that FIFO from the R1 stage without saying which side of it.
//
// Sizes. The sector has N_LAYERS x N_WIRES wires (495 by default, the paper's
// demonstrator); the edge count follows from the edge rules (2261 here, 2163 in
// the paper's irregular sector). A graph is REUSE beats (R = 4 in the paper):
// NODE_LANES = 124 nodes and EDGE_LANES edges per beat, one graph every REUSE
// clocks, i.e. 31.8 MHz of events at the 127.216 MHz system clock.
//
// Ports. s_*: one beat of front-end hit records per clock (hit flag, 4-bit ADC,
// 4-bit TDC, already normalised), s_last on the final beat of an event. m_*:
// the same records with the hit flag of rejected hits cleared, plus each node's
// score. The trained weights of the three MLPs and the threshold are inputs;
// the paper does not print them. All streams use the ready/valid handshake.
//
// Timing. About 28 clocks from the first beat of an event in to its first
// filtered beat out when nothing stalls (this design's pipelines are shallower
// than the paper's HLS ones, and its switch boxes buffer whole graphs).
module gnn_hit_filter
  import gnn_pkg::*;
#(
  parameter int N_LAYERS        = 5,
  parameter int N_WIRES         = 99,
  parameter int REUSE           = 4,
  parameter int HIT_FIFO_DEPTH  = 16,
  parameter int EDGE_FIFO_DEPTH = 16,
  parameter int OUT_FIFO_DEPTH  = 32,
  localparam int N_NODES    = N_LAYERS * N_WIRES,
  localparam int N_EDGES    = num_edges(N_LAYERS, N_WIRES),
  localparam int NODE_LANES = (N_NODES + REUSE - 1) / REUSE,
  localparam int EDGE_LANES = (N_EDGES + REUSE - 1) / REUSE
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // network parameters
  input  r1_weights_t                           r1_w,
  input  o_weights_t                            o_w,
  input  r2_weights_t                           r2_w,
  input  score_t                                thr,
  // hits from the front end
  input  logic                                  s_valid,
  output logic                                  s_ready,
  input  hit_t [NODE_LANES-1:0]                 s_data,
  input  logic                                  s_last,
  // filtered hits to tracking
  output logic                                  m_valid,
  input  logic                                  m_ready,
  output hit_t [NODE_LANES-1:0]                 m_data,
  output logic [NODE_LANES-1:0][SCORE_BITS-1:0] m_score,
  output logic                                  m_last
);

  localparam int HW = $bits(hit_t);

  // ----------------------------------------------------------------- links
  axis_if #(.W(NODE_LANES*HW), .M(1))             l_in0  (clk, rst_n); // -> scatter 1
  axis_if #(.W(NODE_LANES*HW), .M(1))             l_in1  (clk, rst_n); // -> hit FIFO
  axis_if #(.W(NODE_LANES*HW), .M(1))             l_in2  (clk, rst_n); // -> output FIFO
  axis_if #(.W(NODE_LANES*HW), .M(1))             l_hitf (clk, rst_n); // hit FIFO -> agg 1
  axis_if #(.W(NODE_LANES*HW), .M(1))             l_outf (clk, rst_n); // out FIFO -> threshold
  axis_if #(.W(EDGE_LANES*R1_IN*Q_BITS), .M(EDGE_LANES)) l_e1 (clk, rst_n); // scatter 1 -> R1
  axis_if #(.W(EDGE_LANES*EMB*Q_BITS), .M(EDGE_LANES))   l_r1 (clk, rst_n); // R1 out
  axis_if #(.W(EDGE_LANES*EMB*Q_BITS), .M(EDGE_LANES))   l_r1a (clk, rst_n); // -> agg 1
  axis_if #(.W(EDGE_LANES*EMB*Q_BITS), .M(EDGE_LANES))   l_r1f (clk, rst_n); // -> edge FIFO
  axis_if #(.W(EDGE_LANES*EMB*Q_BITS), .M(EDGE_LANES))   l_edgef (clk, rst_n); // edge FIFO -> scatter 2
  axis_if #(.W(NODE_LANES*O_IN*Q_BITS), .M(NODE_LANES))  l_n1 (clk, rst_n); // agg 1 -> O
  axis_if #(.W(NODE_LANES*EMB*Q_BITS), .M(NODE_LANES))   l_o  (clk, rst_n); // O -> scatter 2
  axis_if #(.W(EDGE_LANES*R2_IN*Q_BITS), .M(EDGE_LANES)) l_e2 (clk, rst_n); // scatter 2 -> R2
  axis_if #(.W(EDGE_LANES*SCORE_BITS), .M(EDGE_LANES))   l_r2 (clk, rst_n); // R2 -> agg 2
  axis_if #(.W(NODE_LANES*SCORE_BITS), .M(NODE_LANES))   l_sc (clk, rst_n); // agg 2 -> threshold

  // ------------------------------------------------------ input three-way fork
  logic [2:0] in_v, in_r;

  axis_fork #(.N(3)) u_fork_in (
    .clk, .rst_n, .s_valid(s_valid), .s_ready(s_ready),
    .m_valid(in_v), .m_ready(in_r)
  );

  assign l_in0.valid = in_v[0];
  assign l_in1.valid = in_v[1];
  assign l_in2.valid = in_v[2];
  assign in_r        = {l_in2.ready, l_in1.ready, l_in0.ready};
  assign l_in0.data  = s_data;
  assign l_in1.data  = s_data;
  assign l_in2.data  = s_data;
  assign l_in0.last  = s_last;
  assign l_in1.last  = s_last;
  assign l_in2.last  = s_last;
  assign l_in0.mask  = 1'b1;
  assign l_in1.mask  = 1'b1;
  assign l_in2.mask  = 1'b1;

  // ------------------------------------------------------ bypass FIFOs for hits
  stream_fifo #(.W(NODE_LANES*HW), .DEPTH(HIT_FIFO_DEPTH)) u_hit_fifo (
    .clk, .rst_n,
    .s_valid(l_in1.valid), .s_ready(l_in1.ready), .s_data(l_in1.data), .s_last(l_in1.last),
    .m_valid(l_hitf.valid), .m_ready(l_hitf.ready), .m_data(l_hitf.data), .m_last(l_hitf.last),
    .level()
  );
  assign l_hitf.mask = 1'b1;

  stream_fifo #(.W(NODE_LANES*HW), .DEPTH(OUT_FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .s_valid(l_in2.valid), .s_ready(l_in2.ready), .s_data(l_in2.data), .s_last(l_in2.last),
    .m_valid(l_outf.valid), .m_ready(l_outf.ready), .m_data(l_outf.data), .m_last(l_outf.last),
    .level()
  );
  assign l_outf.mask = 1'b1;

  // ------------------------------------------------------ scatter 1: node -> edge
  scatter_sb #(.N_LAYERS(N_LAYERS), .N_WIRES(N_WIRES), .REUSE(REUSE), .FIRST(1'b1)) u_scatter1 (
    .clk, .rst_n,
    .s_n_valid(l_in0.valid), .s_n_ready(l_in0.ready), .s_n_data(l_in0.data), .s_n_last(l_in0.last),
    .s_e_valid(1'b0), .s_e_ready(), .s_e_data('0), .s_e_mask('0), .s_e_last(1'b0),
    .m_valid(l_e1.valid), .m_ready(l_e1.ready), .m_data(l_e1.data), .m_mask(l_e1.mask),
    .m_last(l_e1.last)
  );

  // ------------------------------------------------------ R1 edge PEs
  pe_array #(.N_ITEMS(N_EDGES), .REUSE(REUSE), .N_IN(R1_IN), .N_HID(R1_HID),
             .N_OUT(EMB), .OUT_BITS(Q_BITS)) u_r1 (
    .clk, .rst_n,
    .w1(r1_w.w1), .b1(r1_w.b1), .w2(r1_w.w2), .b2(r1_w.b2),
    .s_valid(l_e1.valid), .s_ready(l_e1.ready), .s_data(l_e1.data), .s_mask(l_e1.mask),
    .s_last(l_e1.last),
    .m_valid(l_r1.valid), .m_ready(l_r1.ready), .m_data(l_r1.data), .m_mask(l_r1.mask),
    .m_last(l_r1.last)
  );

  // ------------------------------------------------------ R1 result fork
  logic [1:0] r1_v, r1_r;

  axis_fork #(.N(2)) u_fork_r1 (
    .clk, .rst_n, .s_valid(l_r1.valid), .s_ready(l_r1.ready),
    .m_valid(r1_v), .m_ready(r1_r)
  );

  assign l_r1a.valid = r1_v[0];
  assign l_r1f.valid = r1_v[1];
  assign r1_r        = {l_r1f.ready, l_r1a.ready};
  assign l_r1a.data  = l_r1.data;
  assign l_r1f.data  = l_r1.data;
  assign l_r1a.mask  = l_r1.mask;
  assign l_r1f.mask  = l_r1.mask;
  assign l_r1a.last  = l_r1.last;
  assign l_r1f.last  = l_r1.last;

  // ------------------------------------------------------ edge FIFO (R1 -> R2)
  stream_fifo #(.W(EDGE_LANES*(EMB*Q_BITS+1)), .DEPTH(EDGE_FIFO_DEPTH)) u_edge_fifo (
    .clk, .rst_n,
    .s_valid(l_r1f.valid), .s_ready(l_r1f.ready), .s_data({l_r1f.mask, l_r1f.data}),
    .s_last(l_r1f.last),
    .m_valid(l_edgef.valid), .m_ready(l_edgef.ready), .m_data({l_edgef.mask, l_edgef.data}),
    .m_last(l_edgef.last),
    .level()
  );

  // ------------------------------------------------------ aggregate 1: edge -> node
  aggregate_sb #(.N_LAYERS(N_LAYERS), .N_WIRES(N_WIRES), .REUSE(REUSE), .FIRST(1'b1)) u_agg1 (
    .clk, .rst_n,
    .s_e_valid(l_r1a.valid), .s_e_ready(l_r1a.ready), .s_e_data(l_r1a.data),
    .s_e_mask(l_r1a.mask), .s_e_last(l_r1a.last),
    .s_n_valid(l_hitf.valid), .s_n_ready(l_hitf.ready), .s_n_data(l_hitf.data),
    .s_n_last(l_hitf.last),
    .m_valid(l_n1.valid), .m_ready(l_n1.ready), .m_data(l_n1.data), .m_mask(l_n1.mask),
    .m_last(l_n1.last)
  );

  // ------------------------------------------------------ O node PEs
  pe_array #(.N_ITEMS(N_NODES), .REUSE(REUSE), .N_IN(O_IN), .N_HID(O_HID),
             .N_OUT(EMB), .OUT_BITS(Q_BITS)) u_o (
    .clk, .rst_n,
    .w1(o_w.w1), .b1(o_w.b1), .w2(o_w.w2), .b2(o_w.b2),
    .s_valid(l_n1.valid), .s_ready(l_n1.ready), .s_data(l_n1.data), .s_mask(l_n1.mask),
    .s_last(l_n1.last),
    .m_valid(l_o.valid), .m_ready(l_o.ready), .m_data(l_o.data), .m_mask(l_o.mask),
    .m_last(l_o.last)
  );

  // ------------------------------------------------------ scatter 2: node -> edge
  // Edge liveness comes with the R1 results; the node mask of O is not needed.
  scatter_sb #(.N_LAYERS(N_LAYERS), .N_WIRES(N_WIRES), .REUSE(REUSE), .FIRST(1'b0)) u_scatter2 (
    .clk, .rst_n,
    .s_n_valid(l_o.valid), .s_n_ready(l_o.ready), .s_n_data(l_o.data), .s_n_last(l_o.last),
    .s_e_valid(l_edgef.valid), .s_e_ready(l_edgef.ready), .s_e_data(l_edgef.data),
    .s_e_mask(l_edgef.mask), .s_e_last(l_edgef.last),
    .m_valid(l_e2.valid), .m_ready(l_e2.ready), .m_data(l_e2.data), .m_mask(l_e2.mask),
    .m_last(l_e2.last)
  );

  // ------------------------------------------------------ R2 edge PEs
  pe_array #(.N_ITEMS(N_EDGES), .REUSE(REUSE), .N_IN(R2_IN), .N_HID(R2_HID),
             .N_OUT(1), .OUT_BITS(SCORE_BITS)) u_r2 (
    .clk, .rst_n,
    .w1(r2_w.w1), .b1(r2_w.b1), .w2(r2_w.w2), .b2(r2_w.b2),
    .s_valid(l_e2.valid), .s_ready(l_e2.ready), .s_data(l_e2.data), .s_mask(l_e2.mask),
    .s_last(l_e2.last),
    .m_valid(l_r2.valid), .m_ready(l_r2.ready), .m_data(l_r2.data), .m_mask(l_r2.mask),
    .m_last(l_r2.last)
  );

  // ------------------------------------------------------ aggregate 2: edge -> node
  // The "has a live incoming edge" mask of the scores is not needed downstream.
  aggregate_sb #(.N_LAYERS(N_LAYERS), .N_WIRES(N_WIRES), .REUSE(REUSE), .FIRST(1'b0)) u_agg2 (
    .clk, .rst_n,
    .s_e_valid(l_r2.valid), .s_e_ready(l_r2.ready), .s_e_data(l_r2.data),
    .s_e_mask(l_r2.mask), .s_e_last(l_r2.last),
    .s_n_valid(1'b0), .s_n_ready(), .s_n_data('0), .s_n_last(1'b0),
    .m_valid(l_sc.valid), .m_ready(l_sc.ready), .m_data(l_sc.data), .m_mask(l_sc.mask),
    .m_last(l_sc.last)
  );

  // ------------------------------------------------------ threshold
  threshold #(.LANES(NODE_LANES)) u_threshold (
    .clk, .rst_n, .thr(thr),
    .s_s_valid(l_sc.valid), .s_s_ready(l_sc.ready), .s_s_data(l_sc.data), .s_s_last(l_sc.last),
    .s_h_valid(l_outf.valid), .s_h_ready(l_outf.ready), .s_h_data(l_outf.data),
    .s_h_last(l_outf.last),
    .m_valid(m_valid), .m_ready(m_ready), .m_data(m_data), .m_score(m_score),
    .m_last(m_last)
  );

endmodule
