// threshold: final hit selection.
//
// Joins, graph by graph, the classifier score of every node (from the last
// aggregate switch box) with the original front-end hit record (from the bypass
// FIFO) and keeps a hit only if its score is at least thr. Rejected hits leave
// with their hit flag cleared; ADC and TDC pass unchanged, so the downstream
// track finder sees the same wire format as without the filter. The score is the
// linear 8-bit network output that the paper uses in place of a sigmoid, so the
// threshold is an 8-bit signed number on that scale; the paper sets it at the
// working point of 95 % signal-hit efficiency, a value it does not print.
//
// Interface: two AXI4-Stream style inputs joined into one output; a beat is
// taken only when both inputs offer one. Timing: one register stage, latency 1
// clock, one beat per clock. m_score passes the score through for monitoring.
module threshold
  import gnn_pkg::*;
#(
  parameter int LANES = 124
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  score_t                  thr,
  // scores
  input  logic                    s_s_valid,
  output logic                    s_s_ready,
  input  logic [LANES-1:0][SCORE_BITS-1:0] s_s_data,
  input  logic                    s_s_last,
  // hits
  input  logic                    s_h_valid,
  output logic                    s_h_ready,
  input  hit_t [LANES-1:0]        s_h_data,
  input  logic                    s_h_last,
  // filtered hits
  output logic                    m_valid,
  input  logic                    m_ready,
  output hit_t [LANES-1:0]        m_data,
  output logic [LANES-1:0][SCORE_BITS-1:0] m_score,
  output logic                    m_last
);

  logic en, take;

  assign en        = !m_valid || m_ready;
  assign take      = en && s_s_valid && s_h_valid;
  assign s_s_ready = en && s_h_valid;
  assign s_h_ready = en && s_s_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) m_valid <= 1'b0;
    else if (en) m_valid <= s_s_valid && s_h_valid;
  end

  always_ff @(posedge clk) begin
    if (take) begin
      for (int l = 0; l < LANES; l++) begin
        m_data[l]     <= s_h_data[l];
        m_data[l].hit <= s_h_data[l].hit && ($signed(s_s_data[l]) >= thr);
      end
      m_score <= s_s_data;
      m_last  <= s_h_last;
    end
  end

  a_aligned : assert property (@(posedge clk) disable iff (!rst_n)
      take |-> (s_s_last == s_h_last))
    else $error("threshold: score and hit streams out of step");

endmodule
