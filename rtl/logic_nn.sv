// logic_nn -- a whole neural network flattened into fixed-function logic.
//
// Every neuron of every layer is its own piece of logic with its trained
// weights embedded as constants, so one complete inference enters and one
// leaves on every clock cycle; nothing is loaded or reused at run time.
// The input vector is captured in the input flip-flops FF_in, then passes
// through NUM_LAYERS nn_layer stages. SIZES is a list of type
// nn_pkg::sizes_t (9 entries, entries after SIZES[NUM_LAYERS] unused): layer
// l has SIZES[l] inputs and SIZES[l+1] neurons; all but the last apply ReLU, the last one outputs its
// requantised sums directly (regression value or class scores).
//
// The default configuration is the network "OFC-B" of the evaluation: an
// equaliser for optical fibre links with 21 inputs, hidden layers of 50 and
// 25 neurons and one output, 8-bit weights and activations, a 14-bit
// accumulator and two inserted retiming flip-flop stages per layer.
//
// Interface: in_valid with x, SIZES[0] signed 8-bit inputs, input i in
// x[i*8 +: 8]; out_valid with y, SIZES[NUM_LAYERS] signed 8-bit outputs.
// rst_n is asynchronous and active low and clears the valid pipeline only.
// Timing: LATENCY = 1 + NUM_LAYERS * (NUM_IFF + 1) clock cycles from x to y
// (10 at the defaults); throughput one inference per cycle.
//
// The network structure, quantisation and flip-flop placement follow the
// paper; the weights in nn_pkg are placeholders (the trained values are not
// published), and the valid signal, reset and bias terms are this design's
// own choices.
module logic_nn #(
  parameter int unsigned NUM_LAYERS = 3,
  parameter nn_pkg::sizes_t SIZES = '{21, 50, 25, 1, 0, 0, 0, 0, 0},
  parameter int unsigned SEED = 1,
  parameter int unsigned ACC_W = 14,
  parameter int unsigned NUM_IFF = 2,
  localparam int unsigned ACT_W = nn_pkg::ACT_W,
  localparam int unsigned N_X = SIZES[0],
  localparam int unsigned N_Y = SIZES[NUM_LAYERS]
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [N_X*ACT_W-1:0] x,
  output logic                 out_valid,
  output logic [N_Y*ACT_W-1:0] y
);

  // FF_in: the input register in front of the first layer.
  logic [N_X*ACT_W-1:0] x_q;
  logic                 x_valid_q;

  always_ff @(posedge clk) x_q <= x;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) x_valid_q <= 1'b0;
    else        x_valid_q <= in_valid;
  end

  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    logic                           v_in;
    logic [SIZES[l]*ACT_W-1:0]      a_in;
    logic                           v_out;
    logic [SIZES[l+1]*ACT_W-1:0]    a_out;

    if (l == 0) begin : g_first
      assign v_in = x_valid_q;
      assign a_in = x_q;
    end else begin : g_next
      assign v_in = g_layer[l-1].v_out;
      assign a_in = g_layer[l-1].a_out;
    end

    nn_layer #(
      .N_IN   (SIZES[l]),
      .N_OUT  (SIZES[l+1]),
      .LAYER  (l),
      .SEED   (SEED),
      .ACC_W  (ACC_W),
      .RELU_EN(l != NUM_LAYERS - 1),
      .NUM_IFF(NUM_IFF)
    ) u_layer (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (v_in),
      .x        (a_in),
      .out_valid(v_out),
      .y        (a_out)
    );
  end

  assign out_valid = g_layer[NUM_LAYERS-1].v_out;
  assign y         = g_layer[NUM_LAYERS-1].a_out;

endmodule
