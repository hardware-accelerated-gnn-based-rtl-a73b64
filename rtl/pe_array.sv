// pe_array: the processing elements of one network block (R1, O or R2).
//
// A graph arrives as REUSE beats of LANES items each; LANES = ceil(N_ITEMS /
// REUSE). Every lane has its own mlp_pe, so each PE handles REUSE items per graph,
// one per clock: this is the reuse factor R of the paper, which trades PE count
// against the number of clocks per graph (R = 4 gives one graph every 4 clocks).
// The item-valid mask (a live edge, a hit node) and the last-beat flag travel
// alongside the data and are not used by the PEs.
//
// Interface. AXI4-Stream style ready/valid on both sides; s_data holds LANES
// input vectors of N_IN 4-bit values, m_data LANES output vectors of N_OUT
// OUT_BITS-bit values. The weights are shared by all lanes.
//
// Timing. A two-stage pipeline (mlp_pe) with one global stall: the pipeline
// advances when its output stage is empty or accepted, so s_ready = !m_valid ||
// m_ready. Latency 2 cycles, one beat per cycle. The HLS PEs of the paper have
// a longer, tool-determined latency; this depth is this design's own.
module pe_array
  import gnn_pkg::*;
#(
  parameter int N_ITEMS   = 2261,
  parameter int REUSE     = 4,
  parameter int N_IN      = 9,
  parameter int N_HID     = 7,
  parameter int N_OUT     = 4,
  parameter int OUT_BITS  = 4,
  parameter int HID_SHIFT = 3,
  parameter int OUT_SHIFT = 3,
  localparam int LANES    = (N_ITEMS + REUSE - 1) / REUSE
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  // weights
  input  logic [N_HID-1:0][N_IN-1:0][Q_BITS-1:0]  w1,
  input  logic [N_HID-1:0][BIAS_BITS-1:0]         b1,
  input  logic [N_OUT-1:0][N_HID-1:0][Q_BITS-1:0] w2,
  input  logic [N_OUT-1:0][BIAS_BITS-1:0]         b2,
  // input stream
  input  logic                                    s_valid,
  output logic                                    s_ready,
  input  logic [LANES-1:0][N_IN-1:0][Q_BITS-1:0]  s_data,
  input  logic [LANES-1:0]                        s_mask,
  input  logic                                    s_last,
  // output stream
  output logic                                    m_valid,
  input  logic                                    m_ready,
  output logic [LANES-1:0][N_OUT-1:0][OUT_BITS-1:0] m_data,
  output logic [LANES-1:0]                        m_mask,
  output logic                                    m_last
);

  logic en;
  logic v1, v2;
  logic [LANES-1:0] mask1;
  logic last1;

  assign en      = !v2 || m_ready;
  assign s_ready = en;
  assign m_valid = v2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
    end else if (en) begin
      v1 <= s_valid;
      v2 <= v1;
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      mask1  <= s_mask;
      last1  <= s_last;
      m_mask <= mask1;
      m_last <= last1;
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    mlp_pe #(
      .N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .OUT_BITS(OUT_BITS),
      .HID_SHIFT(HID_SHIFT), .OUT_SHIFT(OUT_SHIFT)
    ) u_pe (
      .clk(clk), .en(en), .x(s_data[l]),
      .w1(w1), .b1(b1), .w2(w2), .b2(b2),
      .y(m_data[l])
    );
  end

endmodule
