// mlp_pe: one network processing element, a quantised two-layer perceptron.
//
// Function. y = sat_out( W2 * relu4(W1 * x + b1) + b2 ), one input vector per
// clock. Inputs and weights are 4-bit signed, biases 16-bit signed, the hidden
// activations 4-bit unsigned (ReLU followed by saturation to 0..15) and the
// outputs OUT_BITS-bit signed and saturating, without a final activation. The
// paper fixes the bit widths (4-bit inputs, weights and activations, 16-bit
// biases, 8-bit network output) and replaces the final sigmoid of R2 by a
// linear map; the single hidden layer and the rescaling by an arithmetic right
// shift (HID_SHIFT, OUT_SHIFT) between layers are this design's choices. The
// bias is added at the scale of the weight*input products.
//
// The weights are ports, not constants, so that one trained network can be
// loaded without changing the RTL. Pruned weights are simply zero; with constant
// weights a synthesis tool removes their multipliers.
//
// Timing. Two pipeline registers: the hidden layer is registered, then the
// output. Latency 2 cycles; all registers advance only when en is high, which
// lets the surrounding array stall the pipeline.
module mlp_pe
  import gnn_pkg::*;
#(
  parameter int N_IN      = 9,
  parameter int N_HID     = 7,
  parameter int N_OUT     = 4,
  parameter int OUT_BITS  = 4,
  parameter int HID_SHIFT = 3,
  parameter int OUT_SHIFT = 3
) (
  input  logic                                   clk,
  input  logic                                   en,
  input  logic [N_IN-1:0][Q_BITS-1:0]            x,
  input  logic [N_HID-1:0][N_IN-1:0][Q_BITS-1:0] w1,
  input  logic [N_HID-1:0][BIAS_BITS-1:0]        b1,
  input  logic [N_OUT-1:0][N_HID-1:0][Q_BITS-1:0] w2,
  input  logic [N_OUT-1:0][BIAS_BITS-1:0]        b2,
  output logic [N_OUT-1:0][OUT_BITS-1:0]         y
);

  localparam int ACC_BITS = BIAS_BITS + 8 + $clog2(N_IN + N_HID + 1);
  localparam int OUT_MAX  = (1 << (OUT_BITS - 1)) - 1;
  localparam int OUT_MIN  = -(1 << (OUT_BITS - 1));

  typedef logic signed [ACC_BITS-1:0] acc_t;

  logic [N_HID-1:0][Q_BITS-1:0] h_d, h_q;   // unsigned hidden activations
  logic [N_OUT-1:0][OUT_BITS-1:0] y_d;

  always_comb begin
    for (int j = 0; j < N_HID; j++) begin
      acc_t acc;
      acc = acc_t'($signed(b1[j]));
      for (int i = 0; i < N_IN; i++)
        acc += acc_t'($signed(w1[j][i])) * acc_t'($signed(x[i]));
      acc = acc >>> HID_SHIFT;
      if (acc < 0)        h_d[j] = '0;
      else if (acc > 15)  h_d[j] = 4'd15;
      else                h_d[j] = acc[Q_BITS-1:0];
    end
  end

  always_comb begin
    for (int j = 0; j < N_OUT; j++) begin
      acc_t acc;
      acc = acc_t'($signed(b2[j]));
      for (int i = 0; i < N_HID; i++)
        acc += acc_t'($signed(w2[j][i])) * acc_t'($signed({1'b0, h_q[i]}));
      acc = acc >>> OUT_SHIFT;
      if (acc > acc_t'(OUT_MAX))      y_d[j] = OUT_BITS'(OUT_MAX);
      else if (acc < acc_t'(OUT_MIN)) y_d[j] = OUT_BITS'(OUT_MIN);
      else                            y_d[j] = acc[OUT_BITS-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      h_q <= h_d;
      y   <= y_d;
    end
  end

endmodule
