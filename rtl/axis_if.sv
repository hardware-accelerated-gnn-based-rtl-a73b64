// axis_if: one AXI4-Stream style link between two blocks of the hit filter.
//
// Bundles valid, ready, data, a per-lane mask and the last-beat flag. The paper
// states that all data interfaces are AXI4-Stream compliant and decoupled by a
// ready/valid handshake; this interface carries that handshake and checks its
// two rules on every link: once valid is raised it stays raised, and data, mask
// and last stay unchanged, until ready accepts the beat.
interface axis_if #(
  parameter int W = 8,
  parameter int M = 1
) (
  input logic clk,
  input logic rst_n
);
  logic         valid;
  logic         ready;
  logic [W-1:0] data;
  logic [M-1:0] mask;
  logic         last;

  modport source (output valid, data, mask, last, input ready);
  modport sink   (input valid, data, mask, last, output ready);

  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
      (valid && !ready) |=> valid)
    else $error("axis_if: valid dropped before the beat was accepted");
  a_stable : assert property (@(posedge clk) disable iff (!rst_n)
      (valid && !ready) |=> ($stable(data) && $stable(mask) && $stable(last)))
    else $error("axis_if: payload changed while waiting for ready");
endinterface
