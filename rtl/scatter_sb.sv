// scatter_sb: Scatter Switch Box, node -> edge.
//
// Embeds the static graph into the dataflow: it gathers all node values of one
// graph and hands every edge the values of its source and destination node, so
// that the edge PEs that follow see one complete edge per lane and beat. The
// wiring is fixed at elaboration from the edge rules in gnn_pkg (edge_id and
// slot_exists); nothing is looked up at run time.
//
// Two variants, chosen by FIRST:
//  FIRST = 1 (in front of R1): node input is the front-end hit record (hit, ADC,
//    TDC). Each edge gets {src x, y, ADC; dst x, y, ADC; delta-r, delta-phi,
//    delta-TDC}: x, y, delta-r and delta-phi are the precomputed static graph
//    features, delta-TDC = TDC(dst) - TDC(src) saturated to 4 bits. An edge is
//    live when both wires are hit.
//  FIRST = 0 (in front of R2): node input is the O output of each node; a second
//    input, the side stream, brings the R1 output of every edge (through the
//    FIFO that bypasses the aggregate box and O). Each edge gets {src O, dst O,
//    R1 edge}. Liveness comes with the side stream.
// Element order on m_data[lane]: index 0 is the first element listed above.
//
// Interface. AXI4-Stream style ready/valid streams. A graph is REUSE beats; node
// beats carry NODE_LANES nodes (node n in beat n / NODE_LANES, lane n %
// NODE_LANES), edge beats EDGE_LANES edges, numbered the same way. s_*_last and
// m_last mark the final beat of a graph.
//
// Timing. The box buffers a whole input graph, then copies the edge values into
// an output buffer in one clock and emits them as REUSE beats while the next
// graph is collected, so it sustains one graph every REUSE clocks. Latency from
// the last input beat to the first output beat is 1 clock. The paper's Chisel
// switch boxes are generated by a tool it cites but does not describe; this
// double-buffered gather is this design's own, simplest construction, and
// costs about REUSE clocks more latency than a streaming one.
module scatter_sb
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
  localparam int NODE_W     = FIRST ? $bits(hit_t) : EMB * Q_BITS,
  localparam int SIDE_W     = EMB * Q_BITS,
  localparam int OUT_N      = FIRST ? R1_IN : R2_IN
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // node stream
  input  logic                                   s_n_valid,
  output logic                                   s_n_ready,
  input  logic [NODE_LANES-1:0][NODE_W-1:0]      s_n_data,
  input  logic                                   s_n_last,
  // side stream, per edge (used when FIRST = 0)
  input  logic                                   s_e_valid,
  output logic                                   s_e_ready,
  input  logic [EDGE_LANES-1:0][SIDE_W-1:0]      s_e_data,
  input  logic [EDGE_LANES-1:0]                  s_e_mask,
  input  logic                                   s_e_last,
  // edge stream
  output logic                                   m_valid,
  input  logic                                   m_ready,
  output logic [EDGE_LANES-1:0][OUT_N-1:0][Q_BITS-1:0] m_data,
  output logic [EDGE_LANES-1:0]                  m_mask,
  output logic                                   m_last
);

  localparam int CW = (REUSE > 1) ? $clog2(REUSE) : 1;

  // ---------------------------------------------------------------- buffers
  logic [REUSE-1:0][NODE_LANES-1:0][NODE_W-1:0]       nbuf;
  logic [REUSE-1:0][EDGE_LANES-1:0][SIDE_W-1:0]       sbuf;
  logic [REUSE-1:0][EDGE_LANES-1:0]                   smask;
  logic [REUSE-1:0][EDGE_LANES-1:0][OUT_N-1:0][Q_BITS-1:0] obuf, obuf_d;
  logic [REUSE-1:0][EDGE_LANES-1:0]                   omask, omask_d;

  logic [CW-1:0] n_cnt, e_cnt, o_cnt;
  logic n_full, e_full, in_full, out_busy, out_done, xfer;
  logic n_hs, e_hs;

  assign in_full   = n_full && (FIRST || e_full);
  assign out_done  = m_valid && m_ready && m_last;
  assign xfer      = in_full && (!out_busy || out_done);
  assign s_n_ready = !n_full || xfer;
  assign s_e_ready = FIRST ? 1'b0 : (!e_full || xfer);
  assign n_hs      = s_n_valid && s_n_ready;
  assign e_hs      = s_e_valid && s_e_ready;

  assign m_valid = out_busy;
  assign m_data  = obuf[o_cnt];
  assign m_mask  = omask[o_cnt];
  assign m_last  = (o_cnt == CW'(REUSE - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_cnt    <= '0;
      e_cnt    <= '0;
      o_cnt    <= '0;
      n_full   <= 1'b0;
      e_full   <= 1'b0;
      out_busy <= 1'b0;
    end else begin
      if (n_hs) n_cnt <= (n_cnt == CW'(REUSE - 1)) ? '0 : n_cnt + 1'b1;
      n_full <= (n_full && !xfer) || (n_hs && n_cnt == CW'(REUSE - 1));
      if (!FIRST) begin
        if (e_hs) e_cnt <= (e_cnt == CW'(REUSE - 1)) ? '0 : e_cnt + 1'b1;
        e_full <= (e_full && !xfer) || (e_hs && e_cnt == CW'(REUSE - 1));
      end
      out_busy <= xfer || (out_busy && !out_done);
      if (out_done)               o_cnt <= '0;
      else if (m_valid && m_ready) o_cnt <= o_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (n_hs) nbuf[n_cnt] <= s_n_data;
    if (e_hs) begin
      sbuf[e_cnt]  <= s_e_data;
      smask[e_cnt] <= s_e_mask;
    end
    if (xfer) begin
      obuf  <= obuf_d;
      omask <= omask_d;
    end
  end

  // ------------------------------------------------------------ edge wiring
  for (genvar l = 0; l < N_LAYERS; l++) begin : g_l
    for (genvar w = 0; w < N_WIRES; w++) begin : g_w
      for (genvar k = 0; k < N_SLOTS; k++) begin : g_k
        if (slot_exists(N_LAYERS, N_WIRES, l, w, k)) begin : g_e
          localparam int SRC = l * N_WIRES + w;
          localparam int DST = (l + slot_dl(k)) * N_WIRES + (w + slot_dw(k));
          localparam int E   = edge_id(N_LAYERS, N_WIRES, l, w, k);
          localparam int EB  = E / EDGE_LANES;
          localparam int EL  = E % EDGE_LANES;
          if (FIRST) begin : g_first
            hit_t src, dst;
            assign src = hit_t'(nbuf[SRC / NODE_LANES][SRC % NODE_LANES]);
            assign dst = hit_t'(nbuf[DST / NODE_LANES][DST % NODE_LANES]);
            assign obuf_d[EB][EL][0] = node_x(N_LAYERS, l);
            assign obuf_d[EB][EL][1] = node_y(N_WIRES, w);
            assign obuf_d[EB][EL][2] = src.adc;
            assign obuf_d[EB][EL][3] = node_x(N_LAYERS, l + slot_dl(k));
            assign obuf_d[EB][EL][4] = node_y(N_WIRES, w + slot_dw(k));
            assign obuf_d[EB][EL][5] = dst.adc;
            assign obuf_d[EB][EL][6] = edge_dr(k);
            assign obuf_d[EB][EL][7] = edge_dphi(k);
            assign obuf_d[EB][EL][8] = sat_sub4(dst.tdc, src.tdc);
            assign omask_d[EB][EL]   = src.hit && dst.hit;
          end else begin : g_second
            for (genvar d = 0; d < EMB; d++) begin : g_d
              assign obuf_d[EB][EL][d] =
                nbuf[SRC / NODE_LANES][SRC % NODE_LANES][d*Q_BITS +: Q_BITS];
              assign obuf_d[EB][EL][EMB + d] =
                nbuf[DST / NODE_LANES][DST % NODE_LANES][d*Q_BITS +: Q_BITS];
              assign obuf_d[EB][EL][2*EMB + d] = sbuf[EB][EL][d*Q_BITS +: Q_BITS];
            end
            assign omask_d[EB][EL] = smask[EB][EL];
          end
        end
      end
    end
  end

  // padding slots of the last edge beat
  for (genvar e = N_EDGES; e < EDGE_LANES * REUSE; e++) begin : g_pad
    assign obuf_d[e / EDGE_LANES][e % EDGE_LANES] = '0;
    assign omask_d[e / EDGE_LANES][e % EDGE_LANES] = 1'b0;
  end

  // ------------------------------------------------------------- assertions
  a_n_last : assert property (@(posedge clk) disable iff (!rst_n)
      n_hs |-> (s_n_last == (n_cnt == CW'(REUSE - 1))))
    else $error("scatter_sb: node last flag out of step with beat count");
  if (!FIRST) begin : g_side_check
    a_e_last : assert property (@(posedge clk) disable iff (!rst_n)
        e_hs |-> (s_e_last == (e_cnt == CW'(REUSE - 1))))
      else $error("scatter_sb: side last flag out of step with beat count");
  end

endmodule
