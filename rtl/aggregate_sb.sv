// aggregate_sb: Aggregate Switch Box, edge -> node.
//
// Collects the edge results of one graph and reduces them onto the nodes: each
// node receives, element by element, the maximum over the values of its live
// incoming edges (edges whose destination it is), or 0 when it has none. Max
// rather than sum follows the paper, which changed this aggregation from sum to
// max so that it cannot overflow; 0 for an empty set is the usual graph-library
// convention. The reduction network is fixed at elaboration from the edge rules
// in gnn_pkg: a node has at most six incoming edges.
//
// Two variants, chosen by FIRST:
//  FIRST = 1 (after R1, in front of O): edge values are the 4-element R1 outputs;
//    the side stream brings the front-end hit records through the bypass FIFO.
//    Each node leaves with {x, y, ADC, max R1[0..3]}, the O input, and its hit
//    flag as mask.
//  FIRST = 0 (after R2): edge values are the 8-bit R2 scores and there is no side
//    stream. Each node leaves with its score; the mask says whether it had at
//    least one live incoming edge. The paper names this box but not its
//    reduction; max, as in the first box, is this design's choice.
// Element i of a node word sits at bits [i*VB +: VB].
//
// Interface and timing as in scatter_sb: AXI4-Stream style ready/valid, REUSE
// beats per graph, a full graph buffered, one clock from the last input beat to
// the first output beat, one graph every REUSE clocks sustained.
module aggregate_sb
  import gnn_pkg::*;
#(
  parameter int  N_LAYERS = 5,
  parameter int  N_WIRES  = 99,
  parameter int  REUSE    = 4,
  parameter bit  FIRST    = 1'b1,
  localparam int N_NODES    = N_LAYERS * N_WIRES,
  localparam int N_EDGES    = num_edges(N_LAYERS, N_WIRES),
  localparam int NODE_LANES = (N_NODES + REUSE - 1) / REUSE,
  localparam int EDGE_LANES = (N_EDGES + REUSE - 1) / REUSE,
  localparam int DIMS       = FIRST ? EMB : 1,
  localparam int VB         = FIRST ? Q_BITS : SCORE_BITS,
  localparam int SIDE_W     = $bits(hit_t),
  localparam int OUT_W      = FIRST ? O_IN * Q_BITS : SCORE_BITS
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // edge stream
  input  logic                                   s_e_valid,
  output logic                                   s_e_ready,
  input  logic [EDGE_LANES-1:0][DIMS*VB-1:0]     s_e_data,
  input  logic [EDGE_LANES-1:0]                  s_e_mask,
  input  logic                                   s_e_last,
  // side stream, per node (used when FIRST = 1)
  input  logic                                   s_n_valid,
  output logic                                   s_n_ready,
  input  logic [NODE_LANES-1:0][SIDE_W-1:0]      s_n_data,
  input  logic                                   s_n_last,
  // node stream
  output logic                                   m_valid,
  input  logic                                   m_ready,
  output logic [NODE_LANES-1:0][OUT_W-1:0]       m_data,
  output logic [NODE_LANES-1:0]                  m_mask,
  output logic                                   m_last
);

  localparam int CW = (REUSE > 1) ? $clog2(REUSE) : 1;

  logic [REUSE-1:0][EDGE_LANES-1:0][DIMS*VB-1:0] ebuf;
  logic [REUSE-1:0][EDGE_LANES-1:0]              emask;
  logic [REUSE-1:0][NODE_LANES-1:0][SIDE_W-1:0]  nbuf;
  logic [REUSE-1:0][NODE_LANES-1:0][OUT_W-1:0]   obuf, obuf_d;
  logic [REUSE-1:0][NODE_LANES-1:0]              omask, omask_d;

  logic [CW-1:0] e_cnt, n_cnt, o_cnt;
  logic e_full, n_full, in_full, out_busy, out_done, xfer;
  logic e_hs, n_hs;

  assign in_full   = e_full && (!FIRST || n_full);
  assign out_done  = m_valid && m_ready && m_last;
  assign xfer      = in_full && (!out_busy || out_done);
  assign s_e_ready = !e_full || xfer;
  assign s_n_ready = FIRST ? (!n_full || xfer) : 1'b0;
  assign e_hs      = s_e_valid && s_e_ready;
  assign n_hs      = s_n_valid && s_n_ready;

  assign m_valid = out_busy;
  assign m_data  = obuf[o_cnt];
  assign m_mask  = omask[o_cnt];
  assign m_last  = (o_cnt == CW'(REUSE - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_cnt    <= '0;
      n_cnt    <= '0;
      o_cnt    <= '0;
      e_full   <= 1'b0;
      n_full   <= 1'b0;
      out_busy <= 1'b0;
    end else begin
      if (e_hs) e_cnt <= (e_cnt == CW'(REUSE - 1)) ? '0 : e_cnt + 1'b1;
      e_full <= (e_full && !xfer) || (e_hs && e_cnt == CW'(REUSE - 1));
      if (FIRST) begin
        if (n_hs) n_cnt <= (n_cnt == CW'(REUSE - 1)) ? '0 : n_cnt + 1'b1;
        n_full <= (n_full && !xfer) || (n_hs && n_cnt == CW'(REUSE - 1));
      end
      out_busy <= xfer || (out_busy && !out_done);
      if (out_done)                o_cnt <= '0;
      else if (m_valid && m_ready) o_cnt <= o_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (e_hs) begin
      ebuf[e_cnt]  <= s_e_data;
      emask[e_cnt] <= s_e_mask;
    end
    if (n_hs) nbuf[n_cnt] <= s_n_data;
    if (xfer) begin
      obuf  <= obuf_d;
      omask <= omask_d;
    end
  end

  // --------------------------------------------------------- max reduction
  for (genvar l = 0; l < N_LAYERS; l++) begin : g_l
    for (genvar w = 0; w < N_WIRES; w++) begin : g_w
      localparam int N  = l * N_WIRES + w;
      localparam int NB = N / NODE_LANES;
      localparam int NL = N % NODE_LANES;
      logic [N_SLOTS-1:0]              c_ok;
      logic [N_SLOTS-1:0][DIMS*VB-1:0] c_val;
      logic [DIMS-1:0][VB-1:0]         agg;
      logic                            any;

      // candidate k: the edge arriving from (l - dl_k, w - dw_k) through slot k
      for (genvar k = 0; k < N_SLOTS; k++) begin : g_k
        localparam int SL = l - slot_dl(k);
        localparam int SW = w - slot_dw(k);
        if (SL >= 0 && SW >= 0 && SW < N_WIRES) begin : g_in
          localparam int E = edge_id(N_LAYERS, N_WIRES, SL, SW, k);
          assign c_ok[k]  = emask[E / EDGE_LANES][E % EDGE_LANES];
          assign c_val[k] = ebuf[E / EDGE_LANES][E % EDGE_LANES];
        end else begin : g_none
          assign c_ok[k]  = 1'b0;
          assign c_val[k] = '0;
        end
      end

      always_comb begin
        any = 1'b0;
        agg = '0;
        for (int k = 0; k < N_SLOTS; k++) begin
          if (c_ok[k]) begin
            for (int d = 0; d < DIMS; d++) begin
              if (!any || $signed(c_val[k][d*VB +: VB]) > $signed(agg[d]))
                agg[d] = c_val[k][d*VB +: VB];
            end
            any = 1'b1;
          end
        end
      end

      if (FIRST) begin : g_first
        hit_t h;
        assign h = hit_t'(nbuf[NB][NL]);
        assign obuf_d[NB][NL] = {agg, h.adc, node_y(N_WIRES, w), node_x(N_LAYERS, l)};
        assign omask_d[NB][NL] = h.hit;
      end else begin : g_second
        assign obuf_d[NB][NL]  = agg;
        assign omask_d[NB][NL] = any;
      end
    end
  end

  for (genvar n = N_NODES; n < NODE_LANES * REUSE; n++) begin : g_pad
    assign obuf_d[n / NODE_LANES][n % NODE_LANES]  = '0;
    assign omask_d[n / NODE_LANES][n % NODE_LANES] = 1'b0;
  end

  a_e_last : assert property (@(posedge clk) disable iff (!rst_n)
      e_hs |-> (s_e_last == (e_cnt == CW'(REUSE - 1))))
    else $error("aggregate_sb: edge last flag out of step with beat count");
  if (FIRST) begin : g_side_check
    a_n_last : assert property (@(posedge clk) disable iff (!rst_n)
        n_hs |-> (s_n_last == (n_cnt == CW'(REUSE - 1))))
      else $error("aggregate_sb: side last flag out of step with beat count");
  end

endmodule
