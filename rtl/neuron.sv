// neuron -- the complete combinational logic of one neuron.
//
// y = ReLU( requantize( sum_i x[i] * WEIGHTS[i] + BIAS ) ): a mac_unit with
// the neuron's weights and bias embedded, a requantizer with the layer's
// scale factor embedded that brings the ACC_W-bit sum back to an 8-bit
// activation, and a relu (bypassed when RELU_EN = 0). sat reports that the
// accumulator or the requantiser clipped; is_zero that the ReLU cleared a
// negative value. Both are observation outputs for test and profiling.
//
// Interface: x holds N_IN signed ACT_W-bit inputs, input i in
// x[i*ACT_W +: ACT_W]; y is a signed ACT_W-bit activation.
// Timing: purely combinational; the layer registers it.
//
// The chain MAC -> requantiser -> ReLU follows the paper; the observation
// outputs are this design's own.
module neuron #(
  parameter int unsigned N_IN = 4,
  parameter int unsigned ACT_W = nn_pkg::ACT_W,
  parameter int unsigned W_W = nn_pkg::W_W,
  parameter int unsigned ACC_W = 14,
  parameter logic [N_IN*W_W-1:0] WEIGHTS = {8'sd3, -8'sd16, 8'sd0, 8'sd107},
  parameter int BIAS = 0,
  parameter int unsigned MULT_W = nn_pkg::REQ_MULT_W,
  parameter logic signed [MULT_W-1:0] REQ_MULT = 16'sd2048,
  parameter int unsigned REQ_SHIFT = nn_pkg::REQ_SHIFT,
  parameter bit RELU_EN = 1'b1
) (
  input  logic [N_IN*ACT_W-1:0]  x,
  output logic signed [ACT_W-1:0] y,
  output logic                   sat,
  output logic                   is_zero
);

  logic signed [ACC_W-1:0] acc;
  logic signed [ACT_W-1:0] q;
  logic                    acc_sat;
  logic                    req_sat;

  mac_unit #(
    .N_IN   (N_IN),
    .IN_W   (ACT_W),
    .W_W    (W_W),
    .ACC_W  (ACC_W),
    .WEIGHTS(WEIGHTS),
    .BIAS   (BIAS)
  ) u_mac (
    .x  (x),
    .acc(acc),
    .sat(acc_sat)
  );

  requantizer #(
    .IN_W  (ACC_W),
    .OUT_W (ACT_W),
    .MULT_W(MULT_W),
    .MULT  (REQ_MULT),
    .SHIFT (REQ_SHIFT)
  ) u_req (
    .x  (acc),
    .y  (q),
    .sat(req_sat)
  );

  relu #(
    .W     (ACT_W),
    .ENABLE(RELU_EN)
  ) u_relu (
    .x(q),
    .y(y)
  );

  assign sat     = acc_sat | req_sat;
  assign is_zero = RELU_EN && q[ACT_W-1];

endmodule
