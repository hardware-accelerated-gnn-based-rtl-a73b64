// stream_fifo: first-in first-out buffer for an AXI4-Stream style link.
//
// Carries W data bits and a last flag per beat. In the hit filter three of these
// carry data around the processing elements: the front-end hits to the first
// aggregate switch box and to the threshold, and the R1 edge results to the
// second scatter switch box (the three FIFOs of the block diagram). Their depth
// must cover the latency of the path they bypass, or the fork in front of them
// stalls the main path; the paper gives no depths.
//
// Implementation: a register array of DEPTH entries with read and write
// pointers and an occupancy count; full and empty come from the count.
// Interface: s_* in, m_* out, ready/valid handshake. Timing: a beat written in
// one clock can be read in the next (no fall-through); one beat in and one beat
// out per clock at full throughput. m_valid never depends on m_ready.
module stream_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         s_valid,
  output logic         s_ready,
  input  logic [W-1:0] s_data,
  input  logic         s_last,
  output logic         m_valid,
  input  logic         m_ready,
  output logic [W-1:0] m_data,
  output logic         m_last,
  output logic [$clog2(DEPTH+1)-1:0] level
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int LW = $clog2(DEPTH + 1);

  logic [W:0]    mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          wr, rd;

  assign s_ready = (level != LW'(DEPTH));
  assign m_valid = (level != '0);
  assign wr      = s_valid && s_ready;
  assign rd      = m_valid && m_ready;
  assign {m_last, m_data} = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
    end else begin
      if (wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      level <= level + LW'(wr) - LW'(rd);
    end
  end

  always_ff @(posedge clk) begin
    if (wr) mem[wp] <= {s_last, s_data};
  end

endmodule
