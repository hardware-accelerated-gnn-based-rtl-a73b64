// tb_gnn_full: end-to-end test of the hit filter at its default size.
//
// The full 495-wire sector (5 layers x 99 wires, 2261 edges) with reuse factor
// 4: 124 wires and 566 edges per beat, one event every 4 clocks. Four events
// with gaps and back-pressure, then six back to back; the checks are described
// in tb_gnn_body.svh. With so few events at the default FIFO depths the
// bypass FIFOs never fill; flow-control corner cases are required only by the
// reduced-size test tb_gnn_hit_filter.
module tb_gnn_full;
  import gnn_pkg::*;

  localparam int NL = 5, NW = 99, RU = 4;
  localparam int HIT_D = 16, EDGE_D = 16, OUT_D = 32;
  localparam int N_EV1 = 4, N_EV2 = 6;
  localparam bit REQ_FLOW = 0;
  localparam int WATCHDOG = 20000;
  localparam int NLANES = (NL * NW + RU - 1) / RU;

  r1_weights_t r1_w;
  o_weights_t  o_w;
  r2_weights_t r2_w;
  score_t      thr;
  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last;
  hit_t [NLANES-1:0] s_data, m_data;
  logic [NLANES-1:0][SCORE_BITS-1:0] m_score;

  gnn_hit_filter dut (.*);

  `include "tb_gnn_body.svh"
endmodule
