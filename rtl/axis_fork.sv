// axis_fork: copies one ready/valid stream to N consumers.
//
// Each output is offered the beat until it has taken it; a per-output "taken"
// flag remembers who already has it, and the input is released once every
// output has taken it. So one slow consumer does not make the others see the
// beat twice, and no output valid depends on that output's ready, as the
// AXI4-Stream rules require. The block diagram shows the branch points (front-
// end data to the first scatter box and to two FIFOs; R1 results to the
// aggregate box and to a FIFO); how they are built is this design's choice.
// Timing: combinational, no added latency.
module axis_fork #(
  parameter int N = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         s_valid,
  output logic         s_ready,
  output logic [N-1:0] m_valid,
  input  logic [N-1:0] m_ready
);

  logic [N-1:0] taken, done;

  assign m_valid = {N{s_valid}} & ~taken;
  assign done    = taken | (m_valid & m_ready);
  assign s_ready = &done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 taken <= '0;
    else if (s_valid && s_ready) taken <= '0;
    else if (s_valid)            taken <= done;
  end

endmodule
