// tb_gnn_hit_filter: end-to-end test of the hit filter on a reduced sector.
//
// Grid 4 layers x 6 wires (24 wires, 90 edges), reuse factor 2, default FIFO
// depths; 30 events under random gaps and back-pressure, then 20 events back to
// back. The checks are described in tb_gnn_body.svh.
module tb_gnn_hit_filter;
  import gnn_pkg::*;

  localparam int NL = 4, NW = 6, RU = 2;
  localparam int HIT_D = 16, EDGE_D = 16, OUT_D = 20;
  localparam int N_EV1 = 30, N_EV2 = 20;
  localparam bit REQ_FLOW = 1;
  localparam int WATCHDOG = 200000;
  localparam int NLANES = (NL * NW + RU - 1) / RU;

  r1_weights_t r1_w;
  o_weights_t  o_w;
  r2_weights_t r2_w;
  score_t      thr;
  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last;
  hit_t [NLANES-1:0] s_data, m_data;
  logic [NLANES-1:0][SCORE_BITS-1:0] m_score;

  gnn_hit_filter #(.N_LAYERS(NL), .N_WIRES(NW), .REUSE(RU), .HIT_FIFO_DEPTH(HIT_D),
                   .EDGE_FIFO_DEPTH(EDGE_D), .OUT_FIFO_DEPTH(OUT_D)) dut (.*);

  `include "tb_gnn_body.svh"
endmodule
