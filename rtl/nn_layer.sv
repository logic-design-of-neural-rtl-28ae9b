// nn_layer -- one fully connected layer of the flattened network.
//
// N_OUT neurons, each connected to all N_IN inputs through its own embedded
// weights (a pruned connection has weight 0 and costs no logic), followed by
// the layer's flip-flops: NUM_IFF inserted stages for retiming plus the
// output stage, NUM_IFF + 1 registers in all (pipe_regs). The weights, biases
// and the layer's requantisation factor are taken from nn_pkg for layer index
// LAYER of the network with seed SEED, so the layer is a fixed circuit, not a
// programmable one.
//
// Interface: x holds N_IN signed ACT_W-bit activations (input i in
// x[i*ACT_W +: ACT_W]) with in_valid; y holds N_OUT activations packed the
// same way, with out_valid. Timing: y is the layer function of x from
// NUM_IFF + 1 clock cycles earlier; one input vector is accepted per cycle.
//
// Following the paper: every neuron is its own multiply-accumulate logic
// with weights embedded, and flip-flops (the layer's own and the inserted
// ones) sit after the activation function of each layer.
module nn_layer #(
  parameter int unsigned N_IN = 21,
  parameter int unsigned N_OUT = 4,
  parameter int unsigned LAYER = 0,
  parameter int unsigned SEED = 1,
  parameter int unsigned ACC_W = 14,
  parameter bit RELU_EN = 1'b1,
  parameter int unsigned NUM_IFF = 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [N_IN*nn_pkg::ACT_W-1:0]  x,
  output logic                          out_valid,
  output logic [N_OUT*nn_pkg::ACT_W-1:0] y
);

  localparam int unsigned ACT_W = nn_pkg::ACT_W;
  localparam int unsigned W_W = nn_pkg::W_W;
  localparam int unsigned MULT_W = nn_pkg::REQ_MULT_W;
  localparam logic signed [MULT_W-1:0] REQ_MULT = MULT_W'(nn_pkg::req_mult(SEED, LAYER));

  // The N_IN weights of neuron j, input i in bits [i*W_W +: W_W].
  function automatic logic [N_IN*W_W-1:0] weight_row(int unsigned j);
    logic [N_IN*W_W-1:0] r;
    for (int unsigned i = 0; i < N_IN; i++) begin
      r[i*W_W +: W_W] = nn_pkg::weight(SEED, LAYER, j, i);
    end
    return r;
  endfunction

  logic [N_OUT*ACT_W-1:0] act;

  for (genvar j = 0; j < N_OUT; j++) begin : g_neuron
    neuron #(
      .N_IN     (N_IN),
      .ACT_W    (ACT_W),
      .W_W      (W_W),
      .ACC_W    (ACC_W),
      .WEIGHTS  (weight_row(j)),
      .BIAS     (nn_pkg::bias(SEED, LAYER, j)),
      .MULT_W   (MULT_W),
      .REQ_MULT (REQ_MULT),
      .REQ_SHIFT(nn_pkg::REQ_SHIFT),
      .RELU_EN  (RELU_EN)
    ) u_neuron (
      .x      (x),
      .y      (act[j*ACT_W +: ACT_W]),
      .sat    (),
      .is_zero()
    );
  end

  pipe_regs #(
    .W     (N_OUT * ACT_W),
    .STAGES(NUM_IFF + 1)
  ) u_regs (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_data  (act),
    .out_valid(out_valid),
    .out_data (y)
  );

endmodule
